// physec_pkg: types, constants and symbol mapping shared by the PHYsec blocks.
//
// A PCS symbol is an octet plus the K (control) flag, carried here as a 9-bit
// struct {k, d}. Encryption works on the 267 valid symbols of 1000BASE-X
// (256 data octets and the 11 usable control codes, K28.7 being excluded), each
// mapped to an integer 0..266: a data octet D maps to {1'b0, D}, a control code
// to 256 + its index in KCODES. The order of KCODES is this design's choice.
// The key of one keystream generator is the LFSR seed y0 and, for each of the
// nine skew-tent-map cells, a control parameter gamma and an initial state x0,
// all unsigned fractions (Q0.64).
package physec_pkg;

  localparam int unsigned MODULUS  = 267;  // number of cipherable symbols
  localparam int unsigned N_CELLS  = 9;    // STM cells in a keystream bank
  localparam int unsigned WORD_W   = 73;   // bank output width (9 + 64)
  localparam int unsigned LFSR_LEN = 61;   // LFSR length
  localparam int unsigned MSG_LEN  = 4;    // control message length in symbols

  typedef struct packed {
    logic       k;  // 1 = control code-group
    logic [7:0] d;  // octet
  } sym_t;

  typedef struct packed {
    logic [LFSR_LEN-1:0]        y0;
    logic [N_CELLS-1:0][63:0]   gamma;
    logic [N_CELLS-1:0][63:0]   x0;
  } key_t;

  // Control codes (8-bit value of Kxx.y = {y, xx}).
  localparam logic [7:0] K28_0 = 8'h1C, K28_1 = 8'h3C, K28_2 = 8'h5C, K28_3 = 8'h7C,
                         K28_4 = 8'h9C, K28_5 = 8'hBC, K28_6 = 8'hDC, K28_7 = 8'hFC,
                         K23_7 = 8'hF7, K27_7 = 8'hFB, K29_7 = 8'hFD, K30_7 = 8'hFE;
  // Data codes used by ordered sets.
  localparam logic [7:0] D5_6 = 8'hC5, D16_2 = 8'h50, D21_5 = 8'hB5, D21_2 = 8'h55, D2_2 = 8'h42;

  localparam int unsigned N_KCODES = 11;
  localparam logic [7:0] KCODES [N_KCODES] = '{K28_0, K28_1, K28_2, K28_3, K28_4, K28_5,
                                               K28_6, K23_7, K27_7, K29_7, K30_7};

  localparam sym_t SYM_COMMA = '{k: 1'b1, d: K28_5};
  // Second symbol of /I2/. Symbol pipelines reset to it: a data octet, so a
  // freshly reset pipeline never shows two control codes in a row.
  localparam sym_t SYM_I2D   = '{k: 1'b0, d: D16_2};
  // The /X/ cipher on/off ordered set: /K28.1/D21.5/D21.2/D21.2/.
  localparam sym_t X_SET [MSG_LEN] = '{'{k: 1'b1, d: K28_1}, '{k: 1'b0, d: D21_5},
                                       '{k: 1'b0, d: D21_2}, '{k: 1'b0, d: D21_2}};

  // True for a control code that has a place in the cipher mapping.
  function automatic logic kcode_ok(input logic [7:0] d);
    logic ok;
    ok = 1'b0;
    for (int i = 0; i < N_KCODES; i++) if (KCODES[i] == d) ok = 1'b1;
    return ok;
  endfunction

  // MAP KDATA: control code -> 256..266 (unmapped codes give 256 + 0).
  function automatic logic [8:0] map_sym(input sym_t s);
    logic [8:0] v;
    if (!s.k) return {1'b0, s.d};
    v = 9'd256;
    for (int i = 0; i < N_KCODES; i++) if (KCODES[i] == s.d) v = 9'(256 + i);
    return v;
  endfunction

  // DEMAP KDATA: 0..266 -> symbol.
  function automatic sym_t demap_sym(input logic [8:0] v);
    sym_t s;
    s.k = v[8];
    s.d = v[7:0];
    if (v[8]) begin
      s.d = KCODES[0];
      for (int i = 0; i < N_KCODES; i++) if (v[7:0] == 8'(i)) s.d = KCODES[i];
    end
    return s;
  endfunction

  // True for an idle ordered set /I1/ or /I2/ given as its two symbols.
  function automatic logic is_idle(input sym_t first, input sym_t second);
    return first == SYM_COMMA && !second.k && (second.d == D5_6 || second.d == D16_2);
  endfunction

endpackage
