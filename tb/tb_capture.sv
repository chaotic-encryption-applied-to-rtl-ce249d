// tb_capture: feeds random mapped symbols with /X/ sets (and near misses)
// mixed in, and compares `en` with a model: the state toggles on the symbol
// after each complete /X/, switching on only while ks_ready is high, and
// sync_reset forces it off.
module tb_capture;
  import physec_pkg::*;
  import physec_ref_pkg::*;
  logic clk = 0, rst, sync_reset, ks_ready, en, on;
  logic [8:0] plain_q;
  int checks = 0, failures = 0, toggles = 0;

  capture dut (.clk(clk), .rst(rst), .sync_reset(sync_reset), .ks_ready(ks_ready),
               .plain_q(plain_q), .en(en), .on(on));
  always #4 clk = ~clk;

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int xs [4];
    int h [$];
    bit st;
    bit exp_en;
    int pending [$];
    xs = '{ref_map(1, 8'h3C), 32'hB5, 32'h55, 32'h55};
    rst = 1; sync_reset = 0; ks_ready = 1; plain_q = 0; st = 0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    h = '{0, 0, 0};
    for (int i = 0; i < 20000; i++) begin
      int v;
      if (pending.size() == 0) begin
        int r;
        r = $urandom % 60;
        if (r == 0) pending = '{xs[0], xs[1], xs[2], xs[3]};
        else if (r == 1) pending = '{xs[0], xs[1], xs[2], 32'h56};   // near miss
      end
      v = (pending.size() != 0) ? pending.pop_front() : int'($urandom % 267);
      if (i % 997 == 0) ks_ready = ~ks_ready;
      sync_reset = (i % 1500 == 777);
      plain_q = 9'(v);
      exp_en = st;
      if (h[0] == xs[0] && h[1] == xs[1] && h[2] == xs[2] && v == xs[3]) begin
        exp_en = st ? 1'b0 : ks_ready;
        toggles++;
      end
      if (sync_reset) exp_en = 0;
      #1;
      checks++;
      if (en != exp_en) begin
        failures++;
        if (failures < 5) $display("step %0d en %0b exp %0b", i, en, exp_en);
      end
      @(posedge clk); #1;
      st = exp_en;
      h = '{h[1], h[2], v};
    end
    checks++;
    if (toggles < 50) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
