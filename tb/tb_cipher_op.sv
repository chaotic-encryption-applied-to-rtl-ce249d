// tb_cipher_op: drives an encrypting and a decrypting cipher_op with the same
// random symbols (data octets, the 11 mapped control codes and K28.7), random
// enables and random keystream values. The TX output is compared with
// (map(s) + ks) mod 267 mapped back, worked out from the reference list; the RX
// instance gets the expected ciphertext and must return the plaintext. Checks
// the 6-cycle latency, ks_advance and the RX plaintext tap.
module tb_cipher_op;
  import physec_pkg::*;
  import physec_ref_pkg::*;
  logic clk = 0, rst;
  sym_t tx_din, rx_din, tx_dout, rx_dout;
  logic [8:0] ks, tx_plain, rx_plain;
  logic en, tx_adv, rx_adv;
  int checks = 0, failures = 0;
  localparam int N = 3000;
  bit [8:0] p [N], c [N];
  bit       e [N];
  int       k [N];

  cipher_op #(.DECRYPT(1'b0)) dut_tx (.clk(clk), .rst(rst), .din(tx_din), .ks(ks), .en(en),
                                      .ks_advance(tx_adv), .plain_q(tx_plain), .dout(tx_dout));
  cipher_op #(.DECRYPT(1'b1)) dut_rx (.clk(clk), .rst(rst), .din(rx_din), .ks(ks), .en(en),
                                      .ks_advance(rx_adv), .plain_q(rx_plain), .dout(rx_dout));
  always #4 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 8) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int mv;
    // stimulus and expected ciphertext
    for (int i = 0; i < N; i++) begin
      int r;
      r = $urandom % 100;
      if (r < 8)       p[i] = {1'b1, REF_K[$urandom % 11]};
      else if (r < 10) p[i] = {1'b1, 8'hFC};              // K28.7, not mapped
      else             p[i] = {1'b0, 8'($urandom)};
      e[i] = ($urandom % 4) != 0;
      k[i] = $urandom % 267;
      mv = ref_map(p[i][8], p[i][7:0]);
      c[i] = (e[i] && mv >= 0) ? ref_demap((mv + k[i]) % 267) : p[i];
    end
    rst = 1; tx_din = '0; rx_din = '0; en = 0; ks = 0;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    for (int t = 0; t < N + 8; t++) begin
      tx_din = (t < N) ? p[t] : '0;
      rx_din = (t < N) ? c[t] : '0;
      // the symbol applied two cycles ago is now in the add stage
      en = (t >= 2 && t - 2 < N) ? e[t-2] : 1'b0;
      ks = (t >= 2 && t - 2 < N) ? 9'(k[t-2]) : 9'd0;
      #1;
      check(tx_adv == en && rx_adv == en, "ks_advance");
      @(posedge clk); #1;
      if (t >= 5 && t - 5 < N) begin
        check(tx_dout == c[t-5], $sformatf("tx sym %0d: %h vs %h", t-5, tx_dout, c[t-5]));
        check(rx_dout == p[t-5], $sformatf("rx sym %0d: %h vs %h", t-5, rx_dout, p[t-5]));
      end
      if (t >= 2 && t - 2 < N && ref_map(p[t-2][8], p[t-2][7:0]) >= 0)
        check(rx_plain == 9'(ref_map(p[t-2][8], p[t-2][7:0])), "rx plain tap");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
