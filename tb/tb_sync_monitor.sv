// tb_sync_monitor: clean traffic must raise no alarm, a single corrupted
// symbol must not either, and random symbols (as a misaligned decryption
// produces) must raise sync_loss while decrypting, or mismatch while not,
// exactly 267 cycles after the first rule-breaking symbol.
module tb_sync_monitor;
  import physec_pkg::*;
  import physec_ref_pkg::*;
  logic clk = 0, rst, decrypting, sync_loss, mismatch;
  sym_t din;
  int checks = 0, failures = 0;

  sync_monitor dut (.clk(clk), .rst(rst), .din(din), .decrypting(decrypting),
                    .sync_loss(sync_loss), .mismatch(mismatch));
  always #4 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 8) $display("FAIL %s", what);
    end
  endtask

  // 1000BASE-X full-duplex stream rules, written out as code-group pairs
  function automatic bit breaks(input sym_t s, input sym_t prev);
    bit [8:0] a, b;
    a = prev; b = s;
    if (b[8] && !(b[7:0] inside {8'hBC, 8'hFB, 8'hFD, 8'hF7, 8'hFE, 8'h3C})) return 1;
    if (a == 9'h1BC && !(b inside {9'h0C5, 9'h050, 9'h0B5, 9'h042})) return 1;
    if (a == 9'h1FD && b != 9'h1F7) return 1;
    if (a == 9'h1F7 && !(b inside {9'h1F7, 9'h1BC})) return 1;
    if (b == 9'h1FB && !(a inside {9'h1F7, 9'h0C5, 9'h050, 9'h055})) return 1;
    return 0;
  endfunction

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    traffic_gen tg;
    sym_t prev;
    int t_first, alarms;
    tg = new(50, 60);
    rst = 1; din = SYM_COMMA; decrypting = 0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int round = 0; round < 8; round++) begin
      decrypting = round[0];
      // clean traffic, one corrupted symbol in the middle
      for (int i = 0; i < 3000; i++) begin
        din = sym_t'(tg.next());
        if (i == 1500) din = {1'b1, 8'h1C};
        @(posedge clk); #1;
        check(!sync_loss && !mismatch, "alarm on clean traffic");
      end
      // random symbols until the alarm
      prev = din;
      t_first = -1;
      alarms = 0;
      for (int i = 0; i < 1200 && alarms == 0; i++) begin
        int v;
        v = $urandom % 267;
        din = sym_t'(ref_demap(v));
        if (t_first < 0 && breaks(din, prev)) t_first = i;
        prev = din;
        @(posedge clk); #1;
        if (sync_loss || mismatch) begin
          alarms++;
          check(sync_loss == decrypting && mismatch == !decrypting, "alarm kind");
          // the alarm is out in the 267th cycle counting the violating
          // symbol's own cycle (i - t_first clock edges after it was sampled)
          check(i - t_first == 266, $sformatf("alarm %0d edges after first violation", i - t_first));
        end
      end
      check(alarms == 1, "alarm raised");
      // settle: flush the open window with clean traffic
      for (int i = 0; i < 300; i++) begin
        din = sym_t'(tg.next());
        @(posedge clk); #1;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
