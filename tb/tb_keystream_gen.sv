// tb_keystream_gen: checks the generator's keystream, value by value, against
// the reference model (LFSR + nine skew tent maps + '%267') for two random
// keys, with random gaps between consumed values; checks that the value holds
// while not consumed, that `ready` comes after the key set-up and priming,
// and that a second load restarts the sequence from the start.
module tb_keystream_gen;
  import physec_pkg::*;
  import physec_ref_pkg::*;
  logic clk = 0, rst, load, advance, ready;
  key_t key;
  logic [8:0] ks;
  int checks = 0, failures = 0;

  keystream_gen dut (.clk(clk), .rst(rst), .load(load), .key(key), .advance(advance),
                     .ready(ready), .ks(ks));
  always #4 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ks_model m;
    bit [63:0] g [9], x0 [9];
    int e, cyc, first [20];
    rst = 1; load = 0; advance = 0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int round = 0; round < 3; round++) begin
      if (round < 2) begin
        key.y0 = 61'({$urandom, $urandom}) | 61'h1;
        for (int j = 0; j < 9; j++) begin
          key.gamma[j] = {$urandom, $urandom} | 64'h1;
          key.x0[j]    = {$urandom, $urandom};
        end
      end
      foreach (g[j]) begin g[j] = key.gamma[j]; x0[j] = key.x0[j]; end
      m = new(key.y0, g, x0);
      load = 1; @(posedge clk); #1 load = 0;
      cyc = 1;
      while (!ready && cyc < 1000) begin @(posedge clk); #1 cyc++; end
      // load cycle, 65 cycles of set-up, 2 to fill the word register, 65 through MOD-267
      checks++;
      if (cyc != 1 + 65 + 2 + 65) begin failures++; $display("ready after %0d", cyc); end
      for (int i = 0; i < 400; i++) begin
        e = m.next_ks();
        if (round == 1 && i < 20) first[i] = e;
        if (round == 2 && i < 20) begin
          checks++;
          if (e != first[i]) failures++;
        end
        // value must hold for a random number of cycles
        advance = 0;
        repeat ($urandom % 3) begin
          @(posedge clk); #1;
          checks++;
          if (ks != 9'(e)) failures++;
        end
        checks++;
        if (ks != 9'(e) || ks > 266) begin
          failures++;
          if (failures < 5) $display("round %0d value %0d: %0d vs %0d", round, i, ks, e);
        end
        advance = 1;
        @(posedge clk); #1;
        advance = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
