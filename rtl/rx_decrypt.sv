// rx_decrypt: the receive half of PHYsec (RX DECRYPT), between the 8b10b
// decoder and the RX PCS controller, on the recovered RX clock.
//
// Symbols pass CIPHER_OP_RX (6 cycles) and EXTRACT (5 cycles). CAPTURE
// watches the decrypted value in the cipher and turns decryption on or off
// after each /X/ set, so the first symbol after /X/ is the first one
// decrypted, with the first keystream value, as at the transmitter. EXTRACT
// replaces the /X/ set (and any other message starting with K28.1) by idles
// and reports it: `x_rx` for /X/, `other_rx` for anything else. `plain` is the
// decrypted stream before extraction, for the synchronisation monitor.
module rx_decrypt
  import physec_pkg::*;
#(
  parameter int unsigned CIPHER_LATENCY = 6
) (
  input  logic       clk,
  input  logic       rst,
  input  sym_t       din,
  output sym_t       dout,
  output sym_t       plain,
  input  logic [8:0] ks,
  input  logic       ks_ready,
  output logic       ks_advance,
  input  logic       sync_reset,
  output logic       cipher_on,
  output logic       x_rx,
  output logic       other_rx
);

  logic       en, msg_valid;
  logic [8:0] plain_q;
  sym_t       msg [MSG_LEN];
  logic       is_x;

  cipher_op #(.DECRYPT(1'b1), .LATENCY(CIPHER_LATENCY)) u_cipher (
    .clk(clk), .rst(rst), .din(din), .ks(ks), .en(en),
    .ks_advance(ks_advance), .plain_q(plain_q), .dout(plain)
  );

  capture u_cap (
    .clk(clk), .rst(rst), .sync_reset(sync_reset), .ks_ready(ks_ready),
    .plain_q(plain_q), .en(en), .on(cipher_on)
  );

  extract u_ext (
    .clk(clk), .rst(rst), .din(plain), .dout(dout), .msg_valid(msg_valid), .msg(msg)
  );

  always_comb begin
    is_x = 1'b1;
    for (int i = 0; i < MSG_LEN; i++) if (msg[i] != X_SET[i]) is_x = 1'b0;
  end

  assign x_rx     = msg_valid && is_x;
  assign other_rx = msg_valid && !is_x;

endmodule
