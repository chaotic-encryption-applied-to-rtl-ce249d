// tb_workload_traffic: 1500-byte Ethernet frames through an encrypted link at
// 98% and 10% of the line rate, the loads used in the original hardware test
// (scaled down from 10^6 frames to 60 and 6). The PHYsec top at its default
// size is looped back to itself; encryption is switched on before the burst.
// Every frame leaving the receiver must be identical to the one sent, none may
// be lost, and the measured load on the TX input must match the target. The K
// flag of the ciphertext must be set on about 11/267 of the line symbols at
// both loads: encrypted, a busy link and an idle one look alike. The line
// between the 8b10b encoder and decoder must carry only valid code-groups.
module tb_workload_traffic;
  import physec_pkg::*;

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
  // direct link: the RX samples 3 time units after the TX edge
  assign rx_code = tx_code;

  int checks = 0, failures = 0;
  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  // ---- frame source: frame, then the idle sets that give the target load ----
  localparam int FLEN = 1500;
  bit [8:0] src_q [$];
  int gap_sets = 10;
  int n_sent = 0, busy = 0, total = 0, kline = 0;
  bit [7:0] sent [$][$];
  bit gen_on = 0;

  function automatic void refill();
    bit [7:0] f [$];
    if (gen_on) begin
      src_q.push_back({1'b1, 8'hFB});
      for (int i = 0; i < FLEN; i++) begin
        f.push_back(8'($urandom));
        src_q.push_back({1'b0, f[i]});
      end
      sent.push_back(f);
      n_sent++;
      src_q.push_back({1'b1, 8'hFD});
      src_q.push_back({1'b1, 8'hF7});
      if (src_q.size() % 2 != 0) src_q.push_back({1'b1, 8'hF7});
    end
    for (int i = 0; i < gap_sets; i++) begin
      src_q.push_back({1'b1, 8'hBC});
      src_q.push_back({1'b0, 8'h50});
    end
  endfunction

  always @(posedge clk_tx) begin
    if (src_q.size() == 0) refill();
    tx_din <= sym_t'(src_q.pop_front());
    if (gen_on) total++;
    if (gen_on && dut.tx_sym.k) kline++;
    if (gen_on && !(tx_din.d inside {8'hBC, 8'h50} && (tx_din.d == 8'hBC) == tx_din.k)) busy++;
  end

  // ---- frame sink ----
  int n_rcvd = 0, n_bad = 0;
  bit in_frame = 0;
  bit [7:0] cur [$];
  always @(posedge clk_rx) if (!rst_rx) begin
    if (rx_dout == sym_t'({1'b1, 8'hFB})) begin in_frame = 1; cur = {}; end
    else if (in_frame && rx_dout == sym_t'({1'b1, 8'hFD})) begin
      bit [7:0] e [$];
      in_frame = 0;
      if (sent.size() == 0) n_bad++;
      else begin
        e = sent.pop_front();
        if (e != cur) n_bad++;
      end
      n_rcvd++;
    end else if (in_frame) begin
      if (rx_dout.k) begin in_frame = 0; n_bad++; end
      else cur.push_back(rx_dout.d);
    end
  end

  int n_cerr = 0;
  always @(posedge clk_rx) if (!rst_rx && (rx_code_err || rx_disp_err)) n_cerr++;

  task automatic cycles(int n); repeat (n) @(posedge clk_tx); #1; endtask

  initial begin
    #40000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int loads [2] = '{98, 10};
    automatic int frames [2] = '{60, 6};
    key_tx.y0 = 61'({$urandom, $urandom}) | 61'h1;
    for (int j = 0; j < 9; j++) begin
      key_tx.gamma[j] = {$urandom, $urandom} | 64'h1;
      key_tx.x0[j]    = {$urandom, $urandom};
    end
    key_rx = key_tx;
    rst_tx = 1; rst_rx = 1; restart = 0; x_req = 0; alarm_clear = 0;
    cycles(4);
    rst_tx = 0; rst_rx = 0;
    restart = 1; cycles(1); restart = 0;
    while (!(tx_ks_ready && rx_ks_ready)) cycles(1);
    cycles(100);
    alarm_clear = 1; cycles(1); alarm_clear = 0;
    x_req = 1; cycles(1); x_req = 0;
    while (!(tx_on && rx_on)) cycles(1);
    foreach (loads[k]) begin
      int s0, r0;
      // idle sets after each frame for the target load
      gap_sets = ((FLEN + 4) * (100 - loads[k]) / loads[k] + 1) / 2;
      if (gap_sets < 5) gap_sets = 5;
      s0 = n_sent; r0 = n_rcvd;
      busy = 0; total = 0; kline = 0;
      gen_on = 1;
      while (n_sent - s0 < frames[k]) cycles(1);
      gen_on = 0;
      cycles(2 * (FLEN + 2 * gap_sets) + 200);
      check(n_rcvd - r0 == frames[k], $sformatf("load %0d%%: %0d of %0d frames received", loads[k], n_rcvd - r0, frames[k]));
      check(busy * 100 >= total * (loads[k] - 2) && busy * 100 <= total * (loads[k] + 2),
            $sformatf("load %0d%%: measured %0d/%0d", loads[k], busy, total));
      // ciphertext K flag: 11 of the 267 cipher values are control codes,
      // whatever the traffic pattern underneath
      check(kline * 1000 >= total * 30 && kline * 1000 <= total * 53,
            $sformatf("load %0d%%: K flag on line %0d/%0d", loads[k], kline, total));
      $display("load %0d%%: %0d frames, line busy %0d of %0d symbols, K flag set on %0d",
               loads[k], n_rcvd - r0, busy, total, kline);
    end
    check(n_bad == 0, $sformatf("%0d corrupted frames", n_bad));
    check(n_cerr == 0, $sformatf("%0d invalid code-groups on the encrypted line", n_cerr));
    check(tx_on && rx_on && !alarm_sync && !alarm_mismatch, "link stayed encrypted and aligned");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
