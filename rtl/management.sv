// management: configures, controls and reports the PHYsec encryption.
//
// Runs on the TX clock; events from the RX clock domain reach it through
// synchronisers in the top level. It
//  * restarts the keystreams: `restart` loads the TX generator with its key at
//    once and asks (`rx_restart`) for the RX generator to be loaded, and forces
//    both cipher states off (`tx_sync_reset`), so that a fresh /X/ exchange can
//    re-align the two ends;
//  * sends the /X/ cipher on/off message: `x_req` sets a request that is served
//    by writing the four /X/ symbols into the INSERT buffer, one per clock, as
//    soon as the buffer has room for a whole message (FSM WR side);
//  * latches the alarms: `alarm_sync` (loss of keystream alignment) and
//    `alarm_mismatch` (far end ciphering while this one is not), each set by a
//    pulse from the RX monitor and held until `alarm_clear`;
//  * counts /X/ messages received (`x_rx_count`) and other control messages.
// How the registers reach the user (the paper's FPGA debug system) is left
// out; these are plain ports. The command set is this design's choice.
module management
  import physec_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  // user side
  input  logic        restart,
  input  logic        x_req,
  input  logic        alarm_clear,
  output logic        x_pending,
  output logic        alarm_sync,
  output logic        alarm_mismatch,
  output logic [15:0] x_rx_count,
  output logic [15:0] other_rx_count,
  // keystream generators and capture
  output logic        tx_ks_load,
  output logic        rx_restart,
  output logic        tx_sync_reset,
  // INSERT buffer
  input  logic        ins_space_ok,
  output logic        ins_wr_en,
  output sym_t        ins_wr_sym,
  // events from the RX side (already in this clock domain)
  input  logic        ev_sync_loss,
  input  logic        ev_mismatch,
  input  logic        ev_x_rx,
  input  logic        ev_other_rx
);

  typedef enum logic [0:0] {W_IDLE, W_WRITE} wstate_t;

  wstate_t    wst_q;
  logic [1:0] widx_q;

  assign tx_ks_load    = restart;
  assign rx_restart    = restart;
  assign tx_sync_reset = restart;

  assign ins_wr_en  = wst_q == W_WRITE;
  assign ins_wr_sym = X_SET[widx_q];

  always_ff @(posedge clk) begin
    if (rst) begin
      wst_q          <= W_IDLE;
      widx_q         <= '0;
      x_pending      <= 1'b0;
      alarm_sync     <= 1'b0;
      alarm_mismatch <= 1'b0;
      x_rx_count     <= '0;
      other_rx_count <= '0;
    end else begin
      // FSM WR: one whole message per request.
      if (x_req) x_pending <= 1'b1;
      case (wst_q)
        W_IDLE: if ((x_pending || x_req) && ins_space_ok) begin
          wst_q     <= W_WRITE;
          widx_q    <= '0;
          x_pending <= 1'b0;
        end
        W_WRITE: begin
          widx_q <= widx_q + 1'b1;
          if (widx_q == 2'(MSG_LEN - 1)) wst_q <= W_IDLE;
        end
        default: wst_q <= W_IDLE;
      endcase
      // Alarms
      if (alarm_clear) begin
        alarm_sync     <= 1'b0;
        alarm_mismatch <= 1'b0;
      end
      if (ev_sync_loss) alarm_sync     <= 1'b1;
      if (ev_mismatch)  alarm_mismatch <= 1'b1;
      if (ev_x_rx)      x_rx_count     <= x_rx_count + 1'b1;
      if (ev_other_rx)  other_rx_count <= other_rx_count + 1'b1;
    end
  end

endmodule
