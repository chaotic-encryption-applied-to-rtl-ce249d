// tb_insert_machine: random traffic (frames and idles) with control messages
// waiting in a buffer model. Every output symbol must be the input of 18
// cycles before, except while a message is inserted: then the output must be
// the next message symbol and the input it replaces part of an idle set, the
// four message symbols must come out back to back, and every message written
// must eventually be sent. A message waiting while frames pass must wait.
module tb_insert_machine;
  import physec_pkg::*;
  import physec_ref_pkg::*;
  logic clk = 0, rst, msg_avail, rd_en, inserting;
  sym_t din, dout, rd_sym;
  int checks = 0, failures = 0;
  sym_t buf_q [$];
  sym_t hist [$];
  int sent = 0, queued = 0;

  insert_machine dut (.clk(clk), .rst(rst), .din(din), .msg_avail(msg_avail), .rd_en(rd_en),
                      .rd_sym(rd_sym), .dout(dout), .inserting(inserting));
  always #4 clk = ~clk;

  // buffer model outputs, updated whenever the queue changes
  function automatic void upd();
    msg_avail = buf_q.size() >= 4;
    rd_sym    = buf_q.size() > 0 ? buf_q[0] : SYM_COMMA;
  endfunction

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 8) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #600000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    traffic_gen tg;
    automatic int run = 0;
    bit pop;     // position inside a message being output
    tg = new(70, 40);
    rst = 1; din = SYM_COMMA; upd();
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int t = 0; t < 20000; t++) begin
      if (t % 400 == 5 && t < 16000 && buf_q.size() <= 12) begin
        foreach (X_SET[i]) buf_q.push_back(X_SET[i]);
        queued++;
      end
      upd();
      din = sym_t'(tg.next());
      hist.push_back(din);
      #1 pop = rd_en;
      @(posedge clk); #1;
      if (pop) void'(buf_q.pop_front());
      upd();
      if (hist.size() > 17) begin
        sym_t e;
        e = hist.pop_front();
        if (run > 0 || dout != e) begin
          // inside an insertion
          check(dout == X_SET[run], $sformatf("t=%0d msg sym %0d: %h", t, run, dout));
          check(e.d == 8'hBC ? e.k : (!e.k && (e.d == 8'hC5 || e.d == 8'h50)),
                $sformatf("t=%0d replaced a non-idle %h", t, e));
          run = (run + 1) % 4;
          if (run == 0) sent++;
        end else checks++;   // passed through unchanged
      end
    end
    check(sent == queued, $sformatf("sent %0d of %0d", sent, queued));
    check(sent > 20, "enough insertions");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
