// lfsr61: the LFSR that perturbs the chaotic cells of a keystream bank.
//
// A Fibonacci LFSR of LEN = 61 stages with the maximal-length feedback
// polynomial x^61 + x^60 + x^46 + x^45 + 1 (the paper gives the length, the
// polynomial is this design's choice). One bank needs 8 fresh bits for each of
// eight cells and 9 for the ninth, 73 bits per clock, so the register is
// advanced OUT_W steps in each enabled cycle (the steps are unrolled into
// combinational logic) and the OUT_W new feedback bits are the output, the
// oldest in bits[0]. `load` writes the seed y0, which must not be zero.
// Timing: `bits` changes one clock after an enabled cycle.
module lfsr61 #(
  parameter int unsigned LEN   = 61,
  parameter int unsigned OUT_W = 73
) (
  input  logic             clk,
  input  logic             load,
  input  logic             ce,
  input  logic [LEN-1:0]   seed,
  output logic [OUT_W-1:0] bits
);

  logic [LEN-1:0] state_q;

  always_ff @(posedge clk) begin
    logic [LEN-1:0] s;
    logic           fb;
    if (load) begin
      state_q <= seed;
      bits    <= '0;
    end else if (ce) begin
      s = state_q;
      for (int i = 0; i < OUT_W; i++) begin
        fb      = s[LEN-1] ^ s[LEN-2] ^ s[45] ^ s[44];
        s       = {s[LEN-2:0], fb};
        bits[i] <= fb;
      end
      state_q <= s;
    end
  end

endmodule
