// tb_rx_decrypt: the receive path fed with a ciphertext stream built by the
// testbench: traffic in clear, an /X/ set in place of two idle sets, then the
// traffic encrypted with a test keystream, a second /X/ (encrypted), and
// clear traffic again. The output must be the plaintext of 11 cycles before
// with each /X/ replaced by /I2/ /I2/; x_rx must pulse once per /X/ and the
// keystream must be consumed exactly once per encrypted symbol.
module tb_rx_decrypt;
  import physec_pkg::*;
  import physec_ref_pkg::*;
  logic clk = 0, rst, ks_ready, ks_advance, sync_reset, cipher_on, x_rx, other_rx;
  sym_t din, dout, plain;
  logic [8:0] ks;
  int checks = 0, failures = 0;
  int kseq [$];
  int kidx = 0;

  rx_decrypt dut (.*);
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
    sym_t pq [$], cq [$], exp_q [$];
    bit on;
    int tk, nx, ex;
    bit adv;
    tg = new(60, 50);
    for (int i = 0; i < 20000; i++) kseq.push_back($urandom % 267);
    // build the streams
    on = 0; tk = 0; ex = 0;
    while (pq.size() < 12000) begin
      sym_t a;
      a = sym_t'(tg.next());
      if (a == SYM_COMMA && ((pq.size() > 1000 && ex == 0) || (pq.size() > 7000 && ex == 1))) begin
        void'(tg.next()); void'(tg.next()); void'(tg.next());
        for (int i = 0; i < 4; i++) begin
          pq.push_back(X_SET[i]);
          exp_q.push_back(i % 2 != 0 ? SYM_I2D : SYM_COMMA);
          if (on) begin
            cq.push_back(sym_t'(ref_cipher(X_SET[i], kseq[tk], 1'b0)));
            tk++;
          end else cq.push_back(X_SET[i]);
        end
        on = !on;
        ex++;
      end else begin
        pq.push_back(a);
        exp_q.push_back(a);
        if (on) begin
          cq.push_back(sym_t'(ref_cipher(a, kseq[tk], 1'b0)));
          tk++;
        end else cq.push_back(a);
      end
    end
    rst = 1; din = SYM_COMMA; ks_ready = 1; sync_reset = 0; ks = 0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    nx = 0;
    for (int t = 0; t < 12000 + 11; t++) begin
      din = (t < 12000) ? cq[t] : SYM_COMMA;
      ks = 9'(kseq[kidx]);
      #1 adv = ks_advance;
      @(posedge clk); #1;
      if (adv) kidx++;
      if (x_rx) nx++;
      check(!other_rx, "no other message");
      if (t >= 10 && t - 10 < 12000)
        check(dout == exp_q[t-10], $sformatf("t=%0d out %h vs %h", t, dout, exp_q[t-10]));
    end
    check(nx == 2, $sformatf("x_rx pulses %0d", nx));
    check(kidx == tk, $sformatf("keystream used %0d of %0d", kidx, tk));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
