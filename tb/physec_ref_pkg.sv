// physec_ref_pkg: reference models for the PHYsec testbenches, written
// directly from the defining formulas rather than from the RTL structure:
// the skew tent map with '/' division, a bit-serial LFSR, '%' for the
// modulus, and a plain lookup list for the symbol mapping.
package physec_ref_pkg;

  // Control codes in mapping order: K28.0..K28.6, K23.7, K27.7, K29.7, K30.7.
  localparam byte unsigned REF_K [11] = '{8'h1C, 8'h3C, 8'h5C, 8'h7C, 8'h9C, 8'hBC, 8'hDC,
                                          8'hF7, 8'hFB, 8'hFD, 8'hFE};

  function automatic int ref_map(input bit k, input byte unsigned d);
    if (!k) return int'(d);
    foreach (REF_K[i]) if (REF_K[i] == d) return 256 + i;
    return -1;
  endfunction

  function automatic bit [8:0] ref_demap(input int v);
    if (v < 256) return {1'b0, 8'(v)};
    return {1'b1, REF_K[v - 256]};
  endfunction

  // One cipher operation on a symbol {K, D}; unmapped codes pass unchanged.
  function automatic bit [8:0] ref_cipher(input bit [8:0] s, input int ks, input bit dec);
    int v;
    v = ref_map(s[8], s[7:0]);
    if (v < 0) return s;
    return ref_demap(dec ? (v - ks + 267) % 267 : (v + ks) % 267);
  endfunction

  // Reciprocal in mantissa/shift form and one map iteration.
  function automatic int msb(input bit [63:0] v);
    for (int i = 63; i >= 0; i--) if (v[i]) return i;
    return 0;
  endfunction

  function automatic bit [63:0] ref_recip(input bit [63:0] g);
    bit [127:0] q;
    bit [63:0]  gn;
    gn = g << (63 - msb(g));
    q  = (128'(1) << 127) / {64'd0, gn};
    return (q >= (128'(1) << 64)) ? '1 : q[63:0];
  endfunction

  function automatic bit [63:0] ref_stm(input bit [63:0] x, input bit [63:0] g);
    bit [127:0] p;
    bit [63:0]  a;
    int         sh;
    if (x <= g) begin a = x;  p = {64'd0, x}  * {64'd0, ref_recip(g)};  sh = msb(g);  end
    else        begin a = -x; p = {64'd0, a}  * {64'd0, ref_recip(-g)}; sh = msb(-g); end
    p = p >> sh;
    return (p[127:64] != 0) ? '1 : p[63:0];
  endfunction

  // Bit-serial LFSR x^61 + x^60 + x^46 + x^45 + 1: n new bits, oldest at bit 0.
  function automatic bit [72:0] ref_lfsr_step(inout bit [60:0] s);
    bit [72:0] b;
    for (int i = 0; i < 73; i++) begin
      b[i] = s[60] ^ s[59] ^ s[45] ^ s[44];
      s = {s[59:0], b[i]};
    end
    return b;
  endfunction

  // Whole keystream generator: state kept by the caller.
  class ks_model;
    bit [60:0]  lfsr;
    bit [63:0]  x [9];
    bit [63:0]  g [9];
    bit [72:0]  pert;
    function new(bit [60:0] y0, bit [63:0] gam [9], bit [63:0] x0 [9]);
      lfsr = y0;
      pert = '0;
      foreach (x[i]) begin x[i] = x0[i]; g[i] = gam[i]; end
    endfunction
    // Returns the next 73-bit word.
    function bit [72:0] next_word();
      bit [72:0] w;
      for (int j = 0; j < 9; j++) begin
        int cw;
        bit [63:0] p;
        cw = (j == 8) ? 9 : 8;
        p  = '0;
        for (int b = 0; b < cw; b++) p[b] = pert[8*j + b];
        x[j] = ref_stm(x[j], g[j]) ^ p;
        for (int b = 0; b < cw; b++) w[8*j + b] = x[j][b];
      end
      pert = ref_lfsr_step(lfsr);
      return w;
    endfunction
    function int next_ks();
      bit [72:0] w;
      w = next_word();
      return int'(w % 73'd267);
    endfunction
  endclass

  // Simple 1000BASE-X transmit stream: idle sets /I1/ or /I2/, and frames
  // /S/ data... /T/ /R/ (plus a second /R/ to end on an even position), each
  // frame starting on an even position and followed by at least five idle
  // sets. `load_pct` (0..100) is the chance of starting a frame rather than an
  // idle set whenever the previous one is done; `len` the data octets per frame.
  class traffic_gen;
    int  load_pct;
    int  len;
    bit  [8:0] q [$];
    int  frames;
    function new(int load_pct, int len);
      this.load_pct = load_pct;
      this.len = len;
      frames = 0;
    endfunction
    function bit [8:0] next();
      if (q.size() == 0) begin
        if (int'($urandom % 100) < load_pct) begin
          q.push_back({1'b1, 8'hFB});
          for (int i = 0; i < len; i++) q.push_back({1'b0, 8'($urandom)});
          q.push_back({1'b1, 8'hFD});
          q.push_back({1'b1, 8'hF7});
          if (q.size() % 2 != 0) q.push_back({1'b1, 8'hF7});
          // minimum inter-frame gap: 12 octet times, here 5 idle sets
          repeat (5) begin
            q.push_back({1'b1, 8'hBC});
            q.push_back({1'b0, 8'h50});
          end
          frames++;
        end else begin
          q.push_back({1'b1, 8'hBC});
          q.push_back({1'b0, ($urandom % 2 != 0) ? 8'hC5 : 8'h50});
        end
      end
      return q.pop_front();
    endfunction
  endclass

endpackage
