// capture: start/stop detector for encryption (TX) or decryption (RX).
//
// It watches the plaintext value of each symbol as it leaves the cipher's add
// stage (`plain_q`, mapped to 0..266) and keeps the last three. When the four
// form the /X/ ordered set /K28.1/D21.5/D21.2/D21.2/, the cipher state
// toggles, effective for the very next symbol: `en` is combinational so that
// the cipher already uses it for the symbol in the add stage. /X/ itself is
// therefore sent in the mode that was current: in clear when it switches the
// cipher on, encrypted when it switches it off; the receiver recognises it in
// the decrypted stream in both cases. That /X/ both starts and stops the cipher
// is from the paper; the toggle rule is this design's reading of it.
// Switching on is refused while the keystream is not ready (`ks_ready` low);
// `sync_reset` forces the cipher off (used on a key restart).
module capture
  import physec_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  logic       sync_reset,
  input  logic       ks_ready,
  input  logic [8:0] plain_q,
  output logic       en,
  output logic       on
);

  logic [8:0] hist_q [3];  // hist_q[0] = previous symbol
  logic       det;

  assign det = hist_q[2] == map_sym(X_SET[0]) && hist_q[1] == map_sym(X_SET[1]) &&
               hist_q[0] == map_sym(X_SET[2]) && plain_q   == map_sym(X_SET[3]);

  always_comb begin
    en = on;
    if (det) en = on ? 1'b0 : ks_ready;
    if (sync_reset) en = 1'b0;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      on <= 1'b0;
      for (int i = 0; i < 3; i++) hist_q[i] <= '0;
    end else begin
      on        <= en;
      hist_q[0] <= plain_q;
      hist_q[1] <= hist_q[0];
      hist_q[2] <= hist_q[1];
    end
  end

endmodule
