// enc_8b10b: the 1000BASE-X 8b10b encoder that follows CIPHER_OP_TX.
//
// Each clock one symbol {K, octet} is coded into a 10-bit code-group with the
// running disparity kept in a register (code tables in code8b10b_pkg). PHYsec
// feeds it ciphertext, which is always one of the 267 valid symbols, so the
// line keeps the code's DC balance, run length and comma properties.
// Interface: `din` in, `dout` (bit 9 sent first) one clock later; reset sets
// the running disparity negative, as at power-up in the standard. The code is
// the standard's; the register placement is this design's choice.
module enc_8b10b
  import physec_pkg::*;
  import code8b10b_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  sym_t       din,
  output logic [9:0] dout
);
  logic        rd_q;
  logic [10:0] enc;

  assign enc = encode(din, rd_q);

  always_ff @(posedge clk) begin
    if (rst) begin
      rd_q <= 1'b0;
      dout <= 10'b1010101010;   // D21.5, balanced: leaves the disparity negative
    end else begin
      rd_q <= enc[10];
      dout <= enc[9:0];
    end
  end
endmodule
