// tb_tx_encrypt: the transmit path with a test keystream (random values
// handed out one per ks_advance). Traffic runs through; two /X/ messages are
// written to the buffer. The output is followed with an independent receiver
// model: until an /X/ is seen it must equal the input of 24 cycles before
// (idle sets may be replaced by /X/); after /X/ every symbol decrypted with
// the next keystream value must equal the input, until the (encrypted) second
// /X/, after which the output is plain again.
module tb_tx_encrypt;
  import physec_pkg::*;
  import physec_ref_pkg::*;
  logic clk = 0, rst, wr_en, space_ok, ks_ready, ks_advance, sync_reset, cipher_on, inserting;
  sym_t din, dout, wr_sym;
  logic [8:0] ks;
  int checks = 0, failures = 0;
  int kseq [$];
  int kidx = 0;

  tx_encrypt dut (.*);
  always #4 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 8) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    traffic_gen tg;
    sym_t hist [$];
    bit [8:0] o, p;
    bit [8:0] win [$];
    bit rx_on;
    int rkidx, n_on, n_off, n_enc, xrun;
    bit adv;
    tg = new(60, 50);
    for (int i = 0; i < 20000; i++) kseq.push_back($urandom % 267);
    rst = 1; din = SYM_COMMA; wr_en = 0; wr_sym = '0; ks_ready = 1; sync_reset = 0;
    ks = 9'(kseq[0]);
    repeat (2) @(posedge clk);
    #1 rst = 0;
    rx_on = 0; rkidx = 0; n_on = 0; n_off = 0; n_enc = 0; xrun = 0;
    for (int t = 0; t < 12000; t++) begin
      // write an /X/ message at two moments
      if ((t >= 1000 && t < 1004) || (t >= 6000 && t < 6004)) begin
        wr_en = 1; wr_sym = X_SET[t % 4];
      end else wr_en = 0;
      din = sym_t'(tg.next());
      hist.push_back(din);
      ks = 9'(kseq[kidx]);
      #1 adv = ks_advance;
      @(posedge clk); #1;
      if (adv) kidx++;
      if (hist.size() > 23) begin
        sym_t e;
        e = hist.pop_front();
        o = dout;
        p = o;
        if (rx_on) begin
          p = ref_cipher(o, kseq[rkidx], 1'b1);
          rkidx++;
          n_enc++;
        end
        win.push_back(p);
        if (win.size() > 4) void'(win.pop_front());
        if (xrun > 0 || p == X_SET[0]) begin
          check(p == X_SET[4 - (xrun > 0 ? xrun : 4)], $sformatf("t=%0d /X/ symbol %h", t, p));
          check(e.d == 8'hBC || e.d == 8'hC5 || e.d == 8'h50, "/X/ replaced an idle");
          xrun = (xrun > 0) ? xrun - 1 : 3;
          if (xrun == 0) begin
            rx_on = !rx_on;
            if (rx_on) n_on++; else n_off++;
          end
        end else
          check(p == e, $sformatf("t=%0d out %h (plain %h) vs in %h on=%0b", t, o, p, e, rx_on));
      end
    end
    check(n_on == 1 && n_off == 1 && n_enc > 3000, $sformatf("on %0d off %0d enc %0d", n_on, n_off, n_enc));
    check(rkidx == kidx, "keystream use matches");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
