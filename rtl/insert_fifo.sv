// insert_fifo: the message buffer of the INSERT block (FSM WR, BUFFER, FSM RD).
//
// MANAGEMENT writes control messages into it symbol by symbol; `space_ok`
// tells it whether a whole message of MSG_LEN symbols still fits, and a writer
// should only start a message while it is high (writes to a full buffer are
// dropped). The insert machine sees `msg_avail` once a whole message is
// stored and then pops it with `rd_en`, one symbol per clock; `rd_sym` is the
// head of the buffer (first-word fall-through). The buffer depth is this
// design's choice. Both sides run on the TX clock. An assertion checks the
// reader's side of the handshake: no pop from an empty buffer.
module insert_fifo
  import physec_pkg::*;
#(
  parameter int unsigned DEPTH = 16,
  parameter int unsigned MLEN  = MSG_LEN
) (
  input  logic clk,
  input  logic rst,
  input  logic wr_en,
  input  sym_t wr_sym,
  output logic space_ok,
  output logic msg_avail,
  input  logic rd_en,
  output sym_t rd_sym
);

  localparam int unsigned AW = $clog2(DEPTH);

  sym_t            mem_q [DEPTH];
  logic [AW-1:0]   wp_q, rp_q;
  logic [AW:0]     cnt_q;
  logic            do_wr, do_rd;

  assign do_wr     = wr_en && (cnt_q != (AW+1)'(DEPTH));
  assign do_rd     = rd_en && (cnt_q != '0);
  assign space_ok  = (AW+1)'(DEPTH) - cnt_q >= (AW+1)'(MLEN);
  assign msg_avail = cnt_q >= (AW+1)'(MLEN);
  assign rd_sym    = mem_q[rp_q];

  always_ff @(posedge clk) begin
    if (rst) begin
      wp_q  <= '0;
      rp_q  <= '0;
      cnt_q <= '0;
    end else begin
      if (do_wr) wp_q <= wp_q + 1'b1;
      if (do_rd) rp_q <= rp_q + 1'b1;
      cnt_q <= cnt_q + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

  always_ff @(posedge clk) begin
    if (do_wr) mem_q[wp_q] <= wr_sym;
  end

  // Handshake rule: the reader pops only symbols that are stored.
  a_no_underflow: assert property (@(posedge clk) disable iff (rst) rd_en |-> cnt_q != '0)
    else $error("insert_fifo: read from an empty buffer");

endmodule
