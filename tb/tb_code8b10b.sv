// tb_code8b10b: checks the 8b10b encoder and decoder back to back.
//  * Known code-groups from the standard's tables at both running
//    disparities (K28.5, K28.1, D21.5, D16.2, D0.0, D3.3, D17.7 in its
//    alternate form, K23.7 at positive disparity).
//  * A random stream over all 268 valid symbols: the decoder returns every
//    symbol one clock after the encoder, with no error; the serial line never
//    has more than five equal bits in a row, the running disparity at each
//    code-group boundary stays at +-1, and each code-group has disparity 0 or
//    +-2 of the sign the running disparity asks for.
//  * Single bit errors on the line: almost all are flagged (code or disparity
//    error) within three code-groups.
module tb_code8b10b;
  import physec_pkg::*;
  logic clk = 0, rst;
  sym_t din, dout;
  logic [9:0] code, line;
  logic code_err, disp_err;
  int checks = 0, failures = 0;

  enc_8b10b u_enc (.clk(clk), .rst(rst), .din(din), .dout(code));
  dec_8b10b u_dec (.clk(clk), .rst(rst), .din(line), .dout(dout), .code_err(code_err), .disp_err(disp_err));
  always #4 clk = ~clk;

  task automatic check(input bit cond, input string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s", what);
    end
  endtask

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic sym_t rand_sym();
    int r = $urandom % 268;
    if (r < 256) return '{k: 1'b0, d: 8'(r)};
    if (r < 264) return '{k: 1'b1, d: {3'(r - 256), 5'd28}};
    case (r)
      264: return '{k: 1'b1, d: 8'hF7};
      265: return '{k: 1'b1, d: 8'hFB};
      266: return '{k: 1'b1, d: 8'hFD};
      default: return '{k: 1'b1, d: 8'hFE};
    endcase
  endfunction

  initial begin
    sym_t vin [$];
    logic [9:0] vexp [$];
    sym_t sent [$];
    int run, rdsum, last_bit, det, flips, pos;
    rst = 1; din = SYM_I2D; line = 10'b1010101010;
    repeat (2) @(posedge clk);
    #1 rst = 0;
    // known code-groups, starting at negative running disparity
    vin  = '{'{1'b1, 8'hBC}, '{1'b1, 8'hBC}, '{1'b0, 8'hB5}, '{1'b0, 8'h50},
             '{1'b0, 8'h50}, '{1'b1, 8'h3C}, '{1'b1, 8'h3C}, '{1'b0, 8'h00},
             '{1'b0, 8'h63}, '{1'b0, 8'hF1}, '{1'b1, 8'hF7}};
    vexp = '{10'b0011111010, 10'b1100000101, 10'b1010101010, 10'b0110110101,
             10'b1001000101, 10'b0011111001, 10'b1100000110, 10'b1001110100,
             10'b1100011100, 10'b1000110111, 10'b0001010111};
    foreach (vin[i]) begin
      din = vin[i];
      @(posedge clk); #1;
      line = code;
      check(code == vexp[i], $sformatf("vector %0d: %b, expected %b", i, code, vexp[i]));
    end
    // random stream, encoder to decoder
    run = 0; last_bit = -1;
    rdsum = u_enc.rd_q ? 1 : -1;
    check(u_enc.rd_q == 1'b1, "running disparity positive after the vectors");
    for (int i = 0; i < 20000; i++) begin
      int ones;
      din = rand_sym();
      sent.push_back(din);
      @(posedge clk); #1;
      line = code;
      ones = $countones(code);
      check(ones == 5 || (rdsum < 0 && ones == 6) || (rdsum > 0 && ones == 4),
            $sformatf("disparity of %b at rd %0d", code, rdsum));
      rdsum += 2 * ones - 10;
      check(rdsum == 1 || rdsum == -1, "running disparity at boundary");
      for (int b = 9; b >= 0; b--) begin
        if (int'(code[b]) == last_bit) run++; else run = 1;
        last_bit = int'(code[b]);
        if (run > 5) begin checks++; failures++; end
      end
      if (i >= 1) begin
        automatic sym_t e = sent.pop_front();
        check(dout == e && !code_err && !disp_err,
              $sformatf("decoded %h, expected %h, errors %0d %0d", dout, e, code_err, disp_err));
      end
      @(negedge clk);
    end
    // single bit errors
    det = 0; flips = 0;
    for (int i = 0; i < 2000; i++) begin
      automatic bit hit = 0;
      din = rand_sym();
      @(posedge clk); #1;
      line = code;
      if (i % 8 == 4) begin
        pos = $urandom % 10;
        line[pos] = !line[pos];
        flips++;
        for (int j = 0; j < 3; j++) begin
          din = rand_sym();
          @(posedge clk); #1;
          hit |= code_err || disp_err;
          line = code;
        end
        if (hit) det++;
        // let the decoder's running disparity settle before the next error
        repeat (4) begin din = rand_sym(); @(posedge clk); #1; line = code; end
      end
    end
    $display("bit errors flagged: %0d of %0d", det, flips);
    check(det * 100 >= flips * 90, "bit errors detected");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
