// tb_mod267: checks x mod 267 of the 65-stage pipeline against '%', with
// edge values (0, 267, 267*2^64, all ones), random words, a random clock
// enable, and the 65-cycle latency.
module tb_mod267;
  logic clk = 0, rst, ce, in_valid, out_valid;
  logic [72:0] x;
  logic [8:0] y;
  int checks = 0, failures = 0;
  bit [72:0] q [$];

  mod267 dut (.clk(clk), .rst(rst), .ce(ce), .in_valid(in_valid), .x(x), .out_valid(out_valid), .y(y));
  always #4 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit [72:0] e;
    bit [72:0] edges [6];
    int lat;
    edges = '{73'd0, 73'd267, 73'd266, 73'd267 << 64, '1, (73'd267 << 64) - 1};
    rst = 1; ce = 0; in_valid = 0; x = 0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    // latency: one word, ce always high
    ce = 1; in_valid = 1; x = 73'd1000;
    @(posedge clk); #1 in_valid = 0;
    lat = 1;
    while (!out_valid && lat < 200) begin @(posedge clk); #1 lat++; end
    checks++;
    if (lat != 65 || y != 9'(1000 % 267)) begin
      failures++;
      $display("latency %0d y %0d", lat, y);
    end
    rst = 1; @(posedge clk); #1 rst = 0;
    for (int i = 0; i < 3000; i++) begin
      ce = ($urandom % 3) != 0;
      in_valid = 1;
      x = (i < 6) ? edges[i] : {9'($urandom), $urandom, $urandom};
      if (ce) q.push_back(x);
      @(posedge clk); #1;
      if (ce && out_valid) begin
        e = q.pop_front();
        checks++;
        if (y != 9'(e % 73'd267)) begin
          failures++;
          if (failures < 5) $display("x=%h y=%0d exp=%0d", e, y, e % 73'd267);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
