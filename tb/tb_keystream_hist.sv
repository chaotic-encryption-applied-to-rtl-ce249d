// tb_keystream_hist: uniformity of the keystream, as in the histogram and
// chi-square test of the original work, scaled from 1 310 720 values to
// 267 * 200. One generator at its default size runs with `advance` held high;
// the 267-bin chi-square statistic must stay under 330 (about the 0.5% point
// for 266 degrees of freedom), every value must lie in 0..266, and one value
// must come out per clock.
module tb_keystream_hist;
  import physec_pkg::*;
  logic clk = 0, rst, load, advance, ready;
  key_t key;
  logic [8:0] ks;
  int checks = 0, failures = 0;

  keystream_gen dut (.clk(clk), .rst(rst), .load(load), .key(key), .advance(advance),
                     .ready(ready), .ks(ks));
  always #4 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    localparam int N = 267 * 200;
    int hist [267];
    int prev, repeats;
    real chi, e;
    key.y0 = 61'({$urandom, $urandom}) | 61'h1;
    for (int j = 0; j < 9; j++) begin
      key.gamma[j] = {$urandom, $urandom} | 64'h1;
      key.x0[j]    = {$urandom, $urandom};
    end
    foreach (hist[i]) hist[i] = 0;
    rst = 1; load = 0; advance = 0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    load = 1; @(posedge clk); #1 load = 0;
    while (!ready) begin @(posedge clk); #1; end
    advance = 1;
    prev = -1; repeats = 0;
    for (int i = 0; i < N; i++) begin
      checks++;
      if (ks > 266) failures++;
      else hist[ks]++;
      if (int'(ks) == prev) repeats++;
      prev = int'(ks);
      @(posedge clk); #1;
    end
    e = real'(N) / 267.0;
    chi = 0.0;
    foreach (hist[i]) chi += (real'(hist[i]) - e) * (real'(hist[i]) - e) / e;
    $display("chi-square over 267 bins: %f (N=%0d)", chi, N);
    checks++;
    if (chi > 330.0) failures++;
    // a new value every clock: equal neighbours as often as chance allows
    checks++;
    if (repeats > 3 * N / 267) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
