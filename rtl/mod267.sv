// mod267: pipelined reduction of a 73-bit word modulo 267.
//
// The structure follows the paper's MOD-267 hardware: STAGES = IN_W - 9 + 1 = 65
// stages, numbered 64 down to 0. Stage n compares its operand A with
// theta_n = 267 * 2^n and passes on A - theta_n if A >= theta_n, A otherwise.
// Before stage n the operand is below 2 * theta_n, so after stage 0 it lies in
// 0..266. (The paper's figure labels the comparator "A > theta"; >= is used
// here so that exact multiples of 267 also reduce to 0.)
// Every stage has its own register: latency STAGES cycles, one word per cycle.
// A clock enable `ce` freezes the whole pipeline (used to hold the keystream
// until the cipher consumes it); `in_valid` travels with the data.
module mod267 #(
  parameter int unsigned IN_W    = 73,
  parameter int unsigned MODULUS = 267,
  parameter int unsigned OUT_W   = 9,
  parameter int unsigned STAGES  = IN_W - OUT_W + 1
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             ce,
  input  logic             in_valid,
  input  logic [IN_W-1:0]  x,
  output logic             out_valid,
  output logic [OUT_W-1:0] y
);

  logic [IN_W-1:0] a_q [STAGES];
  logic [STAGES-1:0] v_q;

  function automatic logic [IN_W-1:0] stage(input logic [IN_W-1:0] a, input int unsigned n);
    logic [IN_W-1:0] theta;
    theta = IN_W'(MODULUS) << n;
    return (a >= theta) ? a - theta : a;
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      v_q <= '0;
      for (int s = 0; s < STAGES; s++) a_q[s] <= '0;
    end else if (ce) begin
      // a_q[s] holds the result of the stage with theta = 267 * 2^(STAGES-1-s)
      a_q[0] <= stage(x, STAGES - 1);
      v_q[0] <= in_valid;
      for (int s = 1; s < STAGES; s++) begin
        a_q[s] <= stage(a_q[s-1], STAGES - 1 - s);
        v_q[s] <= v_q[s-1];
      end
    end
  end

  assign y         = a_q[STAGES-1][OUT_W-1:0];
  assign out_valid = v_q[STAGES-1];

endmodule
