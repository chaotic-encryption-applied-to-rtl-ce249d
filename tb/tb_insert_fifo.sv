// tb_insert_fifo: random writes and reads against a queue model; checks
// the head symbol, space_ok (room for a 4-symbol message) and msg_avail (a
// whole message stored), and that writes to a full buffer are dropped.
module tb_insert_fifo;
  import physec_pkg::*;
  logic clk = 0, rst, wr_en, rd_en, space_ok, msg_avail;
  sym_t wr_sym, rd_sym;
  int checks = 0, failures = 0;
  sym_t q [$];

  insert_fifo dut (.clk(clk), .rst(rst), .wr_en(wr_en), .wr_sym(wr_sym), .space_ok(space_ok),
                   .msg_avail(msg_avail), .rd_en(rd_en), .rd_sym(rd_sym));
  always #4 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int fulls = 0;
    rst = 1; wr_en = 0; rd_en = 0; wr_sym = '0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int i = 0; i < 5000; i++) begin
      int phase;
      phase = (i / 500) % 2;   // alternate fill-heavy and drain-heavy
      wr_en  = ($urandom % 4) < (phase != 0 ? 1 : 3);
      rd_en  = ($urandom % 4) < (phase != 0 ? 3 : 1) && q.size() > 0;
      wr_sym = sym_t'($urandom);
      #1;
      checks += 2;
      if (space_ok != (16 - q.size() >= 4)) failures++;
      if (msg_avail != (q.size() >= 4)) failures++;
      if (q.size() > 0) begin
        checks++;
        if (rd_sym != q[0]) begin
          failures++;
          if (failures < 5) $display("head %h vs %h", rd_sym, q[0]);
        end
      end
      if (q.size() == 16) fulls++;
      @(posedge clk); #1;
      if (rd_en) void'(q.pop_front());
      if (wr_en && q.size() + (rd_en ? 1 : 0) < 16) q.push_back(wr_sym);
    end
    checks++;
    if (fulls == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
