// stm_cell: one basic chaotic keystream generator, a skew tent map (STM) cell
// perturbed by LFSR bits.
//
// The state X is a 64-bit unsigned fraction (x = X / 2^64). One iteration is
//   x' = x / gamma            if x <= gamma
//   x' = (1 - x) / (1 - gamma) otherwise,
// after which the W low bits of x' are XORed with W LFSR bits (`pert`); that
// perturbed value is both the new state and, through its W low bits, the
// output. The map, the 64-bit state, the XOR into the low bits and the output
// function follow the paper; the fixed-point arithmetic is this design's own.
//
// Divisions are replaced by a 64x64 multiplication by a reciprocal, as in the
// paper's block diagram. The reciprocals are worked out once per key, by a
// restoring divider that runs for 65 cycles after `load`: for a divisor G with
// its most significant one at bit p, Gn = G << (63-p) and R = floor(2^127/Gn)
// (saturated to 64 bits), so that X/G * 2^64 = (X * R) >> p. A result of 1.0 or
// more saturates to 2^64-1; 1 - x is the two's complement -X, exact because
// x > gamma > 0 on that branch.
//
// Interface: pulse `load` with gamma and x0 stable; `ready` rises when the
// reciprocals are done. Each cycle with `ce` and `ready` high performs one
// iteration; `out` holds the W low bits of the state (valid from the first
// iteration on). gamma must lie strictly between 0 and 1.
module stm_cell #(
  parameter int unsigned W = 8,
  parameter int unsigned N = 64
) (
  input  logic         clk,
  input  logic         rst,
  input  logic         load,
  input  logic [N-1:0] gamma,
  input  logic [N-1:0] x0,
  input  logic         ce,
  input  logic [W-1:0] pert,
  output logic         ready,
  output logic [W-1:0] out
);

  // Position of the most significant one.
  function automatic logic [5:0] msb_pos(input logic [N-1:0] v);
    logic [5:0] p;
    p = '0;
    for (int i = 0; i < N; i++) if (v[i]) p = 6'(i);
    return p;
  endfunction

  logic [N-1:0] g_q, x_q;
  logic [5:0]   pa_q, pb_q;        // shifts for the two branches
  logic [N-1:0] da_q, db_q;        // normalised divisors
  logic [N-1:0] ra_rem_q, rb_rem_q; // divider remainders
  logic [N:0]   ra_q, rb_q;        // quotients (65 bits before saturation)
  logic [6:0]   div_cnt_q;
  logic         busy_q;
  logic [N-1:0]   ra_sat, rb_sat, opnd, recip, fx, x_next;
  logic [5:0]     shamt;
  logic [2*N-1:0] prod, shifted;

  // Divider: quotient of 2^127 by a 64-bit divisor with its MSB set.
  // The remainder is always below the divisor, so its top bit is dropped.
  function automatic logic [2*N:0] div_step(input logic [N-1:0] rem, input logic [N-1:0] q,
                                              input logic [N-1:0] d);
    logic [N:0]   r;
    logic [N-1:0] diff;
    r    = {rem, 1'b0};
    diff = r[N-1:0] - d;            // r - d < d fits N bits; the wrap is exact
    if (r >= {1'b0, d}) return {diff, q, 1'b1};
    else                return {r[N-1:0], q, 1'b0};
  endfunction

  always_ff @(posedge clk) begin
    if (rst) begin
      busy_q    <= 1'b0;
      ready     <= 1'b0;
      div_cnt_q <= '0;
      g_q       <= '0;
      x_q       <= '0;
      pa_q      <= '0;
      pb_q      <= '0;
      da_q      <= '0;
      db_q      <= '0;
      ra_rem_q  <= '0;
      rb_rem_q  <= '0;
      ra_q      <= '0;
      rb_q      <= '0;
    end else if (load) begin
      g_q       <= gamma;
      x_q       <= x0;
      pa_q      <= msb_pos(gamma);
      pb_q      <= msb_pos(-gamma);
      da_q      <= gamma << (6'd63 - msb_pos(gamma));
      db_q      <= (-gamma) << (6'd63 - msb_pos(-gamma));
      ra_rem_q  <= N'(1) << (N-2);
      rb_rem_q  <= N'(1) << (N-2);
      ra_q      <= '0;
      rb_q      <= '0;
      div_cnt_q <= '0;
      busy_q    <= 1'b1;
      ready     <= 1'b0;
    end else if (busy_q) begin
      {ra_rem_q, ra_q} <= div_step(ra_rem_q, ra_q[N-1:0], da_q);
      {rb_rem_q, rb_q} <= div_step(rb_rem_q, rb_q[N-1:0], db_q);
      div_cnt_q        <= div_cnt_q + 7'd1;
      if (div_cnt_q == 7'(N)) begin
        busy_q <= 1'b0;
        ready  <= 1'b1;
      end
    end else if (ready && ce) begin
      x_q <= x_next;
    end
  end

  // One map iteration plus perturbation.

  always_comb begin
    ra_sat  = ra_q[N] ? '1 : ra_q[N-1:0];
    rb_sat  = rb_q[N] ? '1 : rb_q[N-1:0];
    if (x_q <= g_q) begin
      opnd  = x_q;
      recip = ra_sat;
      shamt = pa_q;
    end else begin
      opnd  = -x_q;
      recip = rb_sat;
      shamt = pb_q;
    end
    prod    = opnd * recip;
    shifted = prod >> shamt;
    fx      = (shifted[2*N-1:N] != '0) ? '1 : shifted[N-1:0];
    x_next  = fx ^ {{(N-W){1'b0}}, pert};
  end

  assign out = x_q[W-1:0];

endmodule
