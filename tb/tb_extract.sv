// tb_extract: random traffic with /X/ sets placed on idle positions. The
// output must be the input of 5 cycles before with each /X/ replaced by
// /I2/ /I2/, msg_valid must pulse once per /X/ with the message contents.
module tb_extract;
  import physec_pkg::*;
  import physec_ref_pkg::*;
  logic clk = 0, rst, msg_valid;
  sym_t din, dout;
  sym_t msg [4];
  int checks = 0, failures = 0;
  sym_t hist [$];

  extract dut (.clk(clk), .rst(rst), .din(din), .dout(dout), .msg_valid(msg_valid), .msg(msg));
  always #4 clk = ~clk;

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
    sym_t src [$];
    sym_t e;
    automatic int nx = 0, nv = 0, inj = 0;
    tg = new(60, 30);
    rst = 1; din = SYM_COMMA;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int t = 0; t < 20000; t++) begin
      if (src.size() == 0) begin
        sym_t a, b;
        a = sym_t'(tg.next());
        if (a == SYM_COMMA && ($urandom % 12) == 0) begin
          void'(tg.next());
          foreach (X_SET[i]) src.push_back(X_SET[i]);
          nx++;
          void'(tg.next()); void'(tg.next());   // the /X/ replaces two idle sets
        end else src.push_back(a);
      end
      din = src.pop_front();
      hist.push_back(din);
      @(posedge clk); #1;
      if (msg_valid) begin
        nv++;
        foreach (msg[i]) check(msg[i] == X_SET[i], "message contents");
      end
      if (hist.size() > 4) begin
        e = hist.pop_front();
        if (e == X_SET[0]) inj = 4;
        if (inj > 0) begin
          check(dout == ((inj % 2 == 0) ? SYM_COMMA : SYM_I2D), $sformatf("t=%0d idle fill %h", t, dout));
          inj--;
        end else
          check(dout == e, $sformatf("t=%0d pass %h vs %h", t, dout, e));
      end
    end
    check(nx > 10 && nv == nx, $sformatf("extracted %0d of %0d", nv, nx));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
