// extract: takes control messages out of the decrypted RX symbol stream.
//
// The stream passes through a window of MSG_LEN registers. When the window
// holds a message, MSG_LEN symbols starting with /K28.1/ (the comma-bearing
// first character of the /X/ ordered set; other data after it are left to
// future messages), the message is handed to MANAGEMENT with a one-cycle
// `msg_valid` pulse and replaced in the stream by MSG_LEN/2 idle ordered sets
// /I2/ (K28.5 D16.2; which idle to use is this design's choice). This is the
// reverse of the transmitter's INSERT block. Latency MSG_LEN + 1 cycles.
module extract
  import physec_pkg::*;
#(
  parameter int unsigned MLEN = MSG_LEN
) (
  input  logic clk,
  input  logic rst,
  input  sym_t din,
  output sym_t dout,
  output logic msg_valid,
  output sym_t msg [MLEN]
);

  sym_t win_q [MLEN];   // win_q[MLEN-1] is the oldest symbol
  logic hit;

  assign hit = win_q[MLEN-1].k && win_q[MLEN-1].d == K28_1;

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < MLEN; i++) win_q[i] <= SYM_I2D;
      dout      <= SYM_I2D;
      msg_valid <= 1'b0;
      for (int i = 0; i < MLEN; i++) msg[i] <= SYM_I2D;
    end else begin
      win_q[0] <= din;
      for (int i = 1; i < MLEN; i++) win_q[i] <= win_q[i-1];
      msg_valid <= hit;
      if (hit) begin
        // Replace the whole message with idle sets as it moves on.
        for (int i = 0; i < MLEN; i++) msg[i] <= win_q[MLEN-1-i];
        dout <= SYM_COMMA;
        for (int i = 1; i < MLEN; i++)
          win_q[i] <= ((MLEN - i) % 2 == 0) ? SYM_COMMA : SYM_I2D;
      end else begin
        dout <= win_q[MLEN-1];
      end
    end
  end

endmodule
