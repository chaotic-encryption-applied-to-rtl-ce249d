// tb_stm_cell: checks the perturbed skew-tent-map cell against the reference
// map (division-based reciprocals), for 8- and 9-bit cells, several keys,
// random perturbation and random clock enables. Also checks the reciprocal
// set-up time (ready 65 cycles after the load cycle) and, without perturbation, that the
// fixed-point map stays within 2^-40 of the real-valued map x/g, (1-x)/(1-g).
module tb_stm_cell;
  import physec_ref_pkg::*;
  logic clk = 0, rst, load, ce;
  logic [63:0] gamma, x0;
  logic [7:0] pert8;
  logic [8:0] pert9;
  logic rdy8, rdy9;
  logic [7:0] out8;
  logic [8:0] out9;
  int checks = 0, failures = 0;
  bit [63:0] m8, m9;

  stm_cell #(.W(8)) dut8 (.clk(clk), .rst(rst), .load(load), .gamma(gamma), .x0(x0), .ce(ce),
                          .pert(pert8), .ready(rdy8), .out(out8));
  stm_cell #(.W(9)) dut9 (.clk(clk), .rst(rst), .load(load), .gamma(gamma), .x0(x0), .ce(ce),
                          .pert(pert9), .ready(rdy9), .out(out9));
  always #4 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 8) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit [63:0] gl [5];
    int cyc;
    real xr, gr, fr, err;
    gl = '{64'h8000_0000_0000_0000, 64'h5A5A_1234_9876_F00D, 64'h0000_0100_0000_0001,
           64'hFFFF_FFF0_0000_0000, {$urandom, $urandom}};
    rst = 1; load = 0; ce = 0; pert8 = 0; pert9 = 0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    foreach (gl[k]) begin
      gamma = gl[k];
      x0    = {$urandom, $urandom};
      m8 = x0; m9 = x0;
      load = 1;
      @(posedge clk); #1;
      load = 0;
      cyc = 0;
      while (!rdy8) begin @(posedge clk); #1; cyc++; end
      check(cyc == 65 && rdy9, $sformatf("ready after %0d cycles", cyc));
      for (int i = 0; i < 400; i++) begin
        ce = ($urandom % 5) != 0;
        pert8 = (k == 0) ? 8'h0 : 8'($urandom);
        pert9 = (k == 0) ? 9'h0 : 9'($urandom);
        @(posedge clk); #1;
        if (ce) begin
          if (k == 0) begin
            // real-valued check of one step without perturbation
            xr = real'(m8) / 18446744073709551616.0;
            gr = real'(gamma) / 18446744073709551616.0;
            fr = (xr <= gr) ? xr / gr : (1.0 - xr) / (1.0 - gr);
            if (fr >= 1.0) fr = 1.0;
          end
          m8 = ref_stm(m8, gamma) ^ {56'd0, pert8};
          m9 = ref_stm(m9, gamma) ^ {55'd0, pert9};
          if (k == 0) begin
            err = real'(m8) / 18446744073709551616.0 - fr;
            if (err < 0) err = -err;
            check(err < 1.0e-12 + 2.0e-16 * 64, $sformatf("real map error %g", err));
          end
        end
        check(out8 == m8[7:0], $sformatf("out8 key %0d it %0d: %h vs %h", k, i, out8, m8[7:0]));
        check(out9 == m9[8:0], $sformatf("out9 key %0d it %0d: %h vs %h", k, i, out9, m9[8:0]));
      end
      ce = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
