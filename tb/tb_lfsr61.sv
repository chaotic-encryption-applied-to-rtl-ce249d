// tb_lfsr61: checks the 73-bits-per-clock LFSR against a bit-serial model,
// including holding when ce is low and reloading a seed.
module tb_lfsr61;
  import physec_ref_pkg::*;
  logic clk = 0, load, ce;
  logic [60:0] seed;
  logic [72:0] bits;
  int checks = 0, failures = 0;
  bit [60:0] ms;
  bit [72:0] exp_bits;

  lfsr61 dut (.clk(clk), .load(load), .ce(ce), .seed(seed), .bits(bits));
  always #4 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int round = 0; round < 2; round++) begin
      seed = 61'({$urandom, $urandom}) | 61'h1;
      ms = seed;
      load = 1; ce = 0;
      @(posedge clk); #1;
      load = 0;
      for (int i = 0; i < 300; i++) begin
        ce = ($urandom % 4) != 0;
        @(posedge clk); #1;
        if (ce) exp_bits = ref_lfsr_step(ms);
        if (ce || i > 0) begin
          checks++;
          if (bits !== exp_bits) begin
            failures++;
            if (failures < 5) $display("mismatch step %0d: %h vs %h", i, bits, exp_bits);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
