// tb_physec: end-to-end test of the PHYsec top at its default (full) size.
// The TX output is looped back to the RX input through a small link model
// (a queue between the two clock domains, which can slip or corrupt a
// code-group; the link carries 10-bit code-groups); both keystream
// generators get the same random key. The test runs
// through the whole life of a link and counts each mechanism:
//   restart and keystream priming, /X/ insertion, encryption and decryption
//   switching on, encrypted traffic delivered intact, the randomised K-flag
//   pattern on the line, a slipped symbol detected as loss of
//   synchronisation (with its 267-cycle detection time), recovery by
//   restart, a lost /X/ detected as a mismatch, switching off by a second
//   /X/, and a wrong receiver key making the traffic unreadable.
// Delivery is checked by comparing the RX output with the TX input at a fixed
// offset found per phase; the /X/ replacements may turn /I1/ into /I2/.
module tb_physec;
  import physec_pkg::*;
  import physec_ref_pkg::*;

  logic clk_tx = 0, clk_rx = 0, rst_tx, rst_rx;
  sym_t tx_din, rx_dout;
  logic [9:0] tx_code, rx_code;
  logic rx_code_err, rx_disp_err;
  key_t key_tx, key_rx;
  logic restart, x_req, alarm_clear, x_pending, inserting, tx_on, rx_on;
  logic tx_ks_ready, rx_ks_ready, alarm_sync, alarm_mismatch;
  logic [15:0] x_rx_count, other_rx_count;

  physec dut (.*);

  always #4 clk_tx = ~clk_tx;
  initial begin #3; forever #4 clk_rx = ~clk_rx; end

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  // ---- link model ----
  // The link carries 10-bit code-groups. The corruption turns the K28.1 that
  // starts /X/ into K28.5 of the same disparity (only the 4b sub-block
  // differs), so the line stays a valid code.
  logic [9:0] link_q [$];
  bit   slip_req = 0, corrupt_x = 0;
  int   corrupted = 0;
  always @(posedge clk_tx) begin
    logic [9:0] s;
    s = tx_code;
    if (corrupt_x && s == 10'b0011111001) begin s[3:0] = 4'b1010; corrupted++; corrupt_x = 0; end
    if (corrupt_x && s == 10'b1100000110) begin s[3:0] = 4'b0101; corrupted++; corrupt_x = 0; end
    if (!rst_tx) link_q.push_back(s);
  end
  int n_code_err = 0, n_disp_err = 0, ce_before_slip = 0;
  always @(posedge clk_rx) if (!rst_rx) begin
    if (rx_code_err) n_code_err++;
    if (rx_disp_err) n_disp_err++;
  end
  bit link_up = 0;
  always @(posedge clk_rx) begin
    if (link_q.size() >= 3) link_up = 1;
    if (link_up && link_q.size() > 0) begin
      rx_code <= link_q.pop_front();
      // drop one symbol: the receiver falls one symbol behind the keystream
      if (slip_req && link_q.size() > 1) begin void'(link_q.pop_front()); slip_req = 0; end
    end
  end

  // ---- traffic and logs ----
  traffic_gen tg;
  sym_t txlog [$];
  sym_t rxlog [$];
  int   nk_line = 0, n_line = 0;   // K flags on the line while encrypting
  int   n_insert = 0;
  always @(posedge clk_tx) if (!rst_tx) begin
    txlog.push_back(tx_din);
    if (inserting && !dut.u_tx.u_ins.state_q) n_insert++;
    if (tx_on) begin n_line++; if (dut.tx_sym.k) nk_line++; end
  end
  always @(posedge clk_rx) if (!rst_rx) rxlog.push_back(rx_dout);
  always @(posedge clk_tx) tx_din <= sym_t'(tg.next());

  function automatic bit seq_eq(sym_t a, sym_t b);
    if (a == b) return 1;
    return !a.k && !b.k && (a.d == 8'hC5 || a.d == 8'h50) && (b.d == 8'hC5 || b.d == 8'h50);
  endfunction

  // Compares rxlog[r0..r1) with txlog shifted by the best offset; returns the
  // number of mismatches at that offset.
  function automatic int compare(int r0, int r1, output int best_off);
    int best = 1 << 30;
    best_off = -1;
    for (int off = 30; off < 60; off++) begin
      int bad = 0;
      for (int r = r0; r < r1; r++) begin
        int ti = r - off;
        if (ti < 0 || ti >= txlog.size() || !seq_eq(rxlog[r], txlog[ti])) bad++;
      end
      if (bad < best) begin best = bad; best_off = off; end
    end
    return best;
  endfunction

  task automatic cycles(int n); repeat (n) @(posedge clk_tx); #1; endtask

  task automatic wait_ready();
    int n = 0;
    while (!(tx_ks_ready && rx_ks_ready) && n < 1000) begin cycles(1); n++; end
    check(tx_ks_ready && rx_ks_ready, "keystreams ready");
  endtask

  task automatic send_x();
    x_req = 1; cycles(1); x_req = 0;
  endtask

  // waits until both ends reach the given cipher state (at most n cycles)
  task automatic wait_state(bit want, int n);
    int i = 0;
    while (!(tx_on == want && rx_on == want) && i < n) begin cycles(1); i++; end
    cycles(50);
  endtask

  task automatic do_restart();
    restart = 1; cycles(1); restart = 0;
    wait_ready();
    // symbols in flight at the restart may still close a monitor window:
    // clear the alarms only once a whole window has passed
    cycles(267 + 100);
    alarm_clear = 1; cycles(1); alarm_clear = 0;
  endtask

  // mechanism counters
  int m_restart = 0, m_on = 0, m_off = 0, m_sync = 0, m_mismatch = 0, m_wrongkey = 0;

  initial begin
    #4000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int r0, off, bad, t0, det, i_wait;
    tg = new(70, 200);
    key_tx.y0 = 61'({$urandom, $urandom}) | 61'h1;
    for (int j = 0; j < 9; j++) begin
      key_tx.gamma[j] = {$urandom, $urandom} | 64'h1;
      key_tx.x0[j]    = {$urandom, $urandom};
    end
    key_rx = key_tx;
    rst_tx = 1; rst_rx = 1; rx_code = 10'b1010101010; restart = 0; x_req = 0; alarm_clear = 0; tx_din = SYM_I2D;
    cycles(4);
    rst_tx = 0; rst_rx = 0;
    cycles(2);

    // 1. key load
    do_restart(); m_restart++;
    check(!tx_on && !rx_on, "cipher off after restart");

    // 2. plain traffic
    r0 = rxlog.size();
    cycles(3000);
    bad = compare(r0, rxlog.size() - 60, off);
    check(bad == 0, $sformatf("plain traffic: %0d mismatches at offset %0d", bad, off));
    $display("plain: offset %0d", off);

    // 3. switch encryption on
    send_x();
    wait_state(1, 5000);
    check(tx_on && rx_on, "encryption on at both ends");
    check(x_rx_count == 1, "one /X/ received");
    if (tx_on && rx_on) m_on++;
    r0 = rxlog.size();
    cycles(6000);
    bad = compare(r0, rxlog.size() - 60, off);
    check(bad == 0, $sformatf("encrypted traffic: %0d mismatches", bad));
    check(!alarm_sync && !alarm_mismatch, "no alarm while aligned");
    check(nk_line > n_line / 100 && nk_line < n_line / 12,
          $sformatf("K flags on the encrypted line: %0d of %0d", nk_line, n_line));
    check(tg.frames > 10, "frames sent");

    // 4. slip one symbol on the link: loss of synchronisation
    ce_before_slip = n_code_err;
    slip_req = 1;
    t0 = 0;
    while (!alarm_sync && t0 < 3000) begin cycles(1); t0++; end
    check(alarm_sync, "sync loss detected");
    check(t0 < 267 + 150, $sformatf("sync loss detected after %0d cycles", t0));
    if (alarm_sync) m_sync++;
    $display("sync loss detected %0d cycles after the slip", t0);

    // 5. recover
    do_restart(); m_restart++;
    send_x();
    wait_state(1, 5000);
    check(tx_on && rx_on && !alarm_sync && !alarm_mismatch, "re-synchronised");
    r0 = rxlog.size();
    cycles(3000);
    bad = compare(r0, rxlog.size() - 60, off);
    check(bad == 0, $sformatf("traffic after recovery: %0d mismatches", bad));

    // 6. switch off with a second /X/
    send_x();
    wait_state(0, 5000);
    check(!tx_on && !rx_on, "encryption off at both ends");
    if (!tx_on && !rx_on) m_off++;
    check(x_rx_count == 3, $sformatf("x_rx_count %0d", x_rx_count));
    r0 = rxlog.size();
    cycles(2000);
    bad = compare(r0, rxlog.size() - 60, off);
    check(bad == 0, "plain traffic after switch-off");
    check(!alarm_sync && !alarm_mismatch, "no alarm after switch-off");

    // 7. lose the /X/ on the link: TX ciphers, RX does not
    corrupt_x = 1;
    send_x();
    i_wait = 0;
    while (!tx_on && i_wait < 5000) begin cycles(1); i_wait++; end
    t0 = 0;
    while (!alarm_mismatch && t0 < 3000) begin cycles(1); t0++; end
    check(corrupted == 1 && tx_on && !rx_on, "only the transmitter ciphers");
    check(alarm_mismatch, "mismatch detected");
    if (alarm_mismatch) m_mismatch++;
    do_restart(); m_restart++;

    // 8. wrong receiver key
    key_rx.x0[0] = key_tx.x0[0] ^ 64'h1;
    do_restart(); m_restart++;
    send_x();
    i_wait = 0;
    while (!tx_on && i_wait < 5000) begin cycles(1); i_wait++; end
    cycles(300);
    r0 = rxlog.size();
    cycles(2000);
    bad = compare(r0, rxlog.size() - 60, off);
    check(bad > 1000, $sformatf("wrong key still readable (%0d mismatches)", bad));
    check(alarm_sync, "wrong key flagged");
    if (bad > 1000) m_wrongkey++;

    // the line carries valid 8b10b code-groups, encrypted or not; the dropped
    // code-group of the slip leaves the decoder at the wrong running disparity
    // until an unbalanced code-group, which may show as one or two errors
    check(ce_before_slip == 0 && n_code_err <= 2,
          $sformatf("invalid code-groups: %0d before the slip, %0d in all", ce_before_slip, n_code_err));
    $display("decoder: %0d code errors, %0d disparity errors", n_code_err, n_disp_err);

    // mechanisms
    check(m_restart >= 1, "restart");
    check(n_insert >= 4, $sformatf("insertions %0d", n_insert));
    check(m_on >= 1, "switch on");
    check(m_off >= 1, "switch off");
    check(m_sync >= 1, "sync loss");
    check(m_mismatch >= 1, "mismatch");
    check(m_wrongkey >= 1, "wrong key");
    $display("mechanisms: restart %0d insert %0d on %0d off %0d sync_loss %0d mismatch %0d wrong_key %0d frames %0d",
             m_restart, n_insert, m_on, m_off, m_sync, m_mismatch, m_wrongkey, tg.frames);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
