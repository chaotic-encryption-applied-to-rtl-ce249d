// code8b10b_pkg: the 8b10b code of IEEE 802.3 Clause 36, as functions shared
// by the encoder and the decoder next to PHYsec.
//
// A symbol {K, HGFEDCBA} is coded as a 6-bit sub-block abcdei (from EDCBA) and
// a 4-bit sub-block fghj (from HGF). Each sub-block has a form for negative
// running disparity (the tables below); for positive running disparity the
// complement is sent when the sub-block is unbalanced, and also for D.7/K28
// (6b) and D.x.3 and every K code (4b), as the standard prescribes. The
// running disparity after a sub-block flips when the sub-block is unbalanced.
// D.x.7 takes the alternate form A7 for x = 17, 18, 20 at negative and
// x = 11, 13, 14 at positive running disparity, so that no run of five equal
// bits crosses the sub-blocks. Code-group bit 9 is `a`, the bit sent first,
// and bit 0 is `j`. Only K28.0..K28.7, K23.7, K27.7, K29.7 and K30.7 are
// valid control codes; other K inputs are coded as the data octet would be.
// The 8b10b code itself is the standard's; this package is plain logic.
package code8b10b_pkg;
  import physec_pkg::*;

  function automatic logic [5:0] tab6(input logic [4:0] x);
    case (x)
      5'd0:  return 6'b100111;  5'd1:  return 6'b011101;  5'd2:  return 6'b101101;
      5'd3:  return 6'b110001;  5'd4:  return 6'b110101;  5'd5:  return 6'b101001;
      5'd6:  return 6'b011001;  5'd7:  return 6'b111000;  5'd8:  return 6'b111001;
      5'd9:  return 6'b100101;  5'd10: return 6'b010101;  5'd11: return 6'b110100;
      5'd12: return 6'b001101;  5'd13: return 6'b101100;  5'd14: return 6'b011100;
      5'd15: return 6'b010111;  5'd16: return 6'b011011;  5'd17: return 6'b100011;
      5'd18: return 6'b010011;  5'd19: return 6'b110010;  5'd20: return 6'b001011;
      5'd21: return 6'b101010;  5'd22: return 6'b011010;  5'd23: return 6'b111010;
      5'd24: return 6'b110011;  5'd25: return 6'b100110;  5'd26: return 6'b010110;
      5'd27: return 6'b110110;  5'd28: return 6'b001110;  5'd29: return 6'b101110;
      5'd30: return 6'b011110;  default: return 6'b101011;
    endcase
  endfunction

  // 4b forms for negative running disparity before the sub-block
  function automatic logic [3:0] tab4(input logic k, input logic [2:0] y, input logic alt7);
    case (y)
      3'd0: return 4'b1011;
      3'd1: return k ? 4'b0110 : 4'b1001;
      3'd2: return k ? 4'b1010 : 4'b0101;
      3'd3: return 4'b1100;
      3'd4: return 4'b1101;
      3'd5: return k ? 4'b0101 : 4'b1010;
      3'd6: return k ? 4'b1001 : 4'b0110;
      default: return (k || alt7) ? 4'b0111 : 4'b1110;
    endcase
  endfunction

  // Codes symbol s at running disparity rd (1 = positive); returns
  // {running disparity after the code-group, code-group abcdei_fghj}.
  function automatic logic [10:0] encode(input sym_t s, input logic rd);
    logic [4:0] x;
    logic [2:0] y;
    logic       k28, rd6, alt7, flip6, flip4;
    logic [5:0] c6;
    logic [3:0] c4;
    x   = s.d[4:0];
    y   = s.d[7:5];
    k28 = s.k && x == 5'd28;
    c6  = k28 ? 6'b001111 : tab6(x);
    flip6 = ($countones(c6) != 3) || x == 5'd7 || k28;
    rd6 = ($countones(c6) != 3) ? !rd : rd;
    if (rd && flip6) c6 = ~c6;
    alt7 = !s.k && ((!rd6 && (x == 5'd17 || x == 5'd18 || x == 5'd20)) ||
                    ( rd6 && (x == 5'd11 || x == 5'd13 || x == 5'd14)));
    c4 = tab4(s.k, y, alt7);
    flip4 = ($countones(c4) != 2) || s.k || y == 3'd3;
    if (rd6 && flip4) c4 = ~c4;
    return {(($countones(c4) != 2) ? !rd6 : rd6), c6, c4};
  endfunction

  // Symbol a code-group stands for, assuming it is valid; validity and
  // disparity are checked by coding the result again.
  function automatic sym_t decode(input logic [9:0] code);
    logic [5:0] c6;
    logic [3:0] c4;
    logic [4:0] x;
    logic [2:0] y;
    logic       k28, k;
    c6  = code[9:4];
    c4  = code[3:0];
    x   = '0;
    y   = '0;
    k28 = (c6 == 6'b001111 || c6 == 6'b110000);
    // a balanced sub-block is complemented only where the tables say so; the
    // complement of any other balanced sub-block is a different value
    for (int i = 0; i < 32; i++)
      if (c6 == tab6(5'(i)) ||
          (($countones(tab6(5'(i))) != 3 || i == 7) && c6 == ~tab6(5'(i)))) x = 5'(i);
    if (k28) x = 5'd28;
    for (int j = 0; j < 8; j++) begin
      if (k28) begin
        // after 001111 the running disparity is positive: complemented form
        if (c4 == ((c6 == 6'b001111) ? ~tab4(1'b1, 3'(j), 1'b0) : tab4(1'b1, 3'(j), 1'b0))) y = 3'(j);
      end else if (c4 == tab4(1'b0, 3'(j), 1'b0) ||
                   (($countones(tab4(1'b0, 3'(j), 1'b0)) != 2 || j == 3) &&
                    c4 == ~tab4(1'b0, 3'(j), 1'b0))) y = 3'(j);
    end
    if (!k28 && (c4 == 4'b0111 || c4 == 4'b1000)) y = 3'd7;
    k = k28 || ((c4 == 4'b0111 || c4 == 4'b1000) &&
                (x == 5'd23 || x == 5'd27 || x == 5'd29 || x == 5'd30));
    return '{k: k, d: {y, x}};
  endfunction
endpackage
