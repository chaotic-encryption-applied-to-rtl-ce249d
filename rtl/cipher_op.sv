// cipher_op: the stream cipher operation on 8b10b symbols (CIPHER_OP_TX/RX).
//
// Each symbol {K, D} is mapped to an integer 0..266: a data octet to {0, D}
// and a control code through the MAP KDATA table of physec_pkg. While the
// cipher is enabled the keystream value is added (DECRYPT = 0) or subtracted
// (DECRYPT = 1) modulo 267; the result is mapped back, its MSB giving the K
// flag. The structure and the 6-cycle latency follow the paper; the split into
// stages is this design's choice:
//   stage 1  input register
//   stage 2  map to 0..266
//   stage 3  +/- keystream mod 267          <- `en`, `ks` sampled here
//   stage 4  map back to {K, D}
//   stage 5,6 delay
// `en` is the enable for the symbol now in the add stage; when it is high the
// current `ks` is used and `ks_advance` asks the generator for the next one.
// `plain_q` is the plaintext value (0..266) of the symbol that has just left
// the add stage: the mapped input for TX, the decrypted result for RX. CAPTURE
// watches it to decide `en` for the next symbol. A control code outside the
// mapping (K28.7) is passed unchanged; its keystream value is still consumed.
// One symbol per clock, no stall.
module cipher_op
  import physec_pkg::*;
#(
  parameter bit          DECRYPT = 1'b0,
  parameter int unsigned LATENCY = 6
) (
  input  logic       clk,
  input  logic       rst,
  input  sym_t       din,
  input  logic [8:0] ks,
  input  logic       en,
  output logic       ks_advance,
  output logic [8:0] plain_q,
  output sym_t       dout
);

  sym_t       s1_q;                 // input register
  logic [8:0] m2_q;                 // mapped value
  logic       ok2_q;                // symbol is in the mapping
  sym_t       raw2_q;               // original symbol, for unmapped codes
  logic [8:0] r3_q;                 // cipher result
  logic       ok3_q;
  sym_t       raw3_q;
  sym_t       dly_q [LATENCY-3];    // stage 4 and the delay stages

  logic [9:0] sum;
  logic [8:0] res;

  always_comb begin
    if (!DECRYPT) begin
      sum = {1'b0, m2_q} + {1'b0, ks};
      res = (sum >= 10'(MODULUS)) ? 9'(sum - 10'(MODULUS)) : sum[8:0];
    end else begin
      sum = {1'b0, m2_q} - {1'b0, ks};
      res = sum[9] ? 9'(sum + 10'(MODULUS)) : sum[8:0];
    end
    if (!en || !ok2_q) res = m2_q;
  end

  assign ks_advance = en;

  always_ff @(posedge clk) begin
    if (rst) begin
      s1_q   <= SYM_I2D;
      m2_q   <= '0;
      ok2_q  <= 1'b1;
      raw2_q <= SYM_I2D;
      r3_q   <= '0;
      ok3_q  <= 1'b1;
      raw3_q <= SYM_I2D;
      plain_q <= '0;
      for (int i = 0; i < LATENCY - 3; i++) dly_q[i] <= SYM_I2D;
    end else begin
      s1_q   <= din;
      m2_q   <= map_sym(s1_q);
      ok2_q  <= !s1_q.k || kcode_ok(s1_q.d);
      raw2_q <= s1_q;
      r3_q   <= res;
      ok3_q  <= ok2_q;
      raw3_q <= raw2_q;
      plain_q <= DECRYPT ? res : m2_q;
      dly_q[0] <= ok3_q ? demap_sym(r3_q) : raw3_q;
      for (int i = 1; i < LATENCY - 3; i++) dly_q[i] <= dly_q[i-1];
    end
  end

  assign dout = dly_q[LATENCY-4];

endmodule
