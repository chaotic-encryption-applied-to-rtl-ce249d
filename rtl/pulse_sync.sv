// pulse_sync: carries single-cycle pulses from one clock domain to another.
//
// Each source pulse flips a toggle flip-flop; the destination passes the
// toggle through two flip-flops and turns each change into a one-cycle pulse.
// Pulses must be at least three destination cycles apart. Latency two to
// three destination cycles.
module pulse_sync (
  input  logic clk_src,
  input  logic rst_src,
  input  logic pulse_src,
  input  logic clk_dst,
  input  logic rst_dst,
  output logic pulse_dst
);

  logic tog_q;
  logic [2:0] sync_q;

  always_ff @(posedge clk_src) begin
    if (rst_src) tog_q <= 1'b0;
    else if (pulse_src) tog_q <= ~tog_q;
  end

  always_ff @(posedge clk_dst) begin
    if (rst_dst) sync_q <= '0;
    else         sync_q <= {sync_q[1:0], tog_q};
  end

  assign pulse_dst = sync_q[2] ^ sync_q[1];

endmodule
