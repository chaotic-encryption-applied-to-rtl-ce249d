// tx_encrypt: the transmit half of PHYsec (TX ENCRYPT), between the TX PCS
// controller and the 8b10b encoder.
//
// Symbols pass INSERT (message buffer and insert machine, 18 cycles) and then
// CIPHER_OP_TX (6 cycles): 24 cycles from `din` to `dout`, one symbol per
// clock, as in the paper. CAPTURE watches the plaintext in the cipher and turns
// encryption on or off after each /X/ set. The keystream generator is outside;
// this block takes its current value `ks` and asks for the next with
// `ks_advance`.
module tx_encrypt
  import physec_pkg::*;
#(
  parameter int unsigned INSERT_LATENCY = 18,
  parameter int unsigned CIPHER_LATENCY = 6,
  parameter int unsigned FIFO_DEPTH     = 16
) (
  input  logic       clk,
  input  logic       rst,
  input  sym_t       din,
  output sym_t       dout,
  // message buffer write port (from MANAGEMENT)
  input  logic       wr_en,
  input  sym_t       wr_sym,
  output logic       space_ok,
  // keystream
  input  logic [8:0] ks,
  input  logic       ks_ready,
  output logic       ks_advance,
  // control and status
  input  logic       sync_reset,
  output logic       cipher_on,
  output logic       inserting
);

  logic       msg_avail, rd_en, en;
  sym_t       rd_sym, ins_out;
  logic [8:0] plain_q;

  insert_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo (
    .clk(clk), .rst(rst), .wr_en(wr_en), .wr_sym(wr_sym), .space_ok(space_ok),
    .msg_avail(msg_avail), .rd_en(rd_en), .rd_sym(rd_sym)
  );

  insert_machine #(.LATENCY(INSERT_LATENCY)) u_ins (
    .clk(clk), .rst(rst), .din(din), .msg_avail(msg_avail), .rd_en(rd_en),
    .rd_sym(rd_sym), .dout(ins_out), .inserting(inserting)
  );

  cipher_op #(.DECRYPT(1'b0), .LATENCY(CIPHER_LATENCY)) u_cipher (
    .clk(clk), .rst(rst), .din(ins_out), .ks(ks), .en(en),
    .ks_advance(ks_advance), .plain_q(plain_q), .dout(dout)
  );

  capture u_cap (
    .clk(clk), .rst(rst), .sync_reset(sync_reset), .ks_ready(ks_ready),
    .plain_q(plain_q), .en(en), .on(cipher_on)
  );

endmodule
