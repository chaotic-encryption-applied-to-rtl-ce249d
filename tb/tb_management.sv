// tb_management: checks that x_req writes the four /X/ symbols into the
// INSERT buffer on consecutive cycles, waits while the buffer lacks room,
// that alarms latch and clear, that received-message counters count, and
// that restart drives the generator load and cipher resets.
module tb_management;
  import physec_pkg::*;
  logic clk = 0, rst, restart, x_req, alarm_clear, x_pending, alarm_sync, alarm_mismatch;
  logic [15:0] x_rx_count, other_rx_count;
  logic tx_ks_load, rx_restart, tx_sync_reset, ins_space_ok, ins_wr_en;
  sym_t ins_wr_sym;
  logic ev_sync_loss, ev_mismatch, ev_x_rx, ev_other_rx;
  int checks = 0, failures = 0;

  management dut (.*);
  always #4 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 8) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect_msg();
    for (int i = 0; i < 4; i++) begin
      check(ins_wr_en && ins_wr_sym == X_SET[i], $sformatf("write %0d: %0b %h", i, ins_wr_en, ins_wr_sym));
      @(posedge clk); #1;
    end
    check(!ins_wr_en, "write stops after 4");
  endtask

  initial begin
    rst = 1; restart = 0; x_req = 0; alarm_clear = 0; ins_space_ok = 1;
    ev_sync_loss = 0; ev_mismatch = 0; ev_x_rx = 0; ev_other_rx = 0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    // restart
    restart = 1; #1;
    check(tx_ks_load && rx_restart && tx_sync_reset, "restart outputs");
    @(posedge clk); #1 restart = 0; #1;
    check(!tx_ks_load && !rx_restart && !tx_sync_reset, "restart is a pulse");
    // /X/ request with room
    x_req = 1; @(posedge clk); #1 x_req = 0;
    expect_msg();
    // /X/ request without room: pending until room
    ins_space_ok = 0;
    x_req = 1; @(posedge clk); #1 x_req = 0;
    repeat (10) begin
      check(!ins_wr_en && x_pending, "waits for room");
      @(posedge clk); #1;
    end
    ins_space_ok = 1;
    @(posedge clk); #1;
    check(!x_pending, "pending cleared");
    expect_msg();
    // alarms
    check(!alarm_sync && !alarm_mismatch, "alarms clear");
    ev_sync_loss = 1; @(posedge clk); #1 ev_sync_loss = 0;
    repeat (5) @(posedge clk); #1;
    check(alarm_sync && !alarm_mismatch, "sync alarm latched");
    ev_mismatch = 1; @(posedge clk); #1 ev_mismatch = 0;
    check(alarm_sync && alarm_mismatch, "mismatch alarm latched");
    alarm_clear = 1; @(posedge clk); #1 alarm_clear = 0;
    check(!alarm_sync && !alarm_mismatch, "alarms cleared");
    // counters
    for (int i = 0; i < 7; i++) begin
      ev_x_rx = 1; ev_other_rx = (i % 3 == 0);
      @(posedge clk); #1;
      ev_x_rx = 0; ev_other_rx = 0;
      @(posedge clk); #1;
    end
    check(x_rx_count == 7 && other_rx_count == 3, $sformatf("counts %0d %0d", x_rx_count, other_rx_count));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
