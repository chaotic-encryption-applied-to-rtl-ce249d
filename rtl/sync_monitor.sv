// sync_monitor: detects that the receiver no longer decrypts in step with the
// transmitter, or that only one end is ciphering.
//
// A correctly decrypted full-duplex 1000BASE-X stream follows a small
// grammar: the only control codes are K28.5 (start of every /I/ and /C/ set),
// /S/ K27.7, /T/ K29.7, /R/ K23.7, /V/ K30.7 and K28.1 (start of /X/); K28.5 is
// followed by D5.6, D16.2, D21.5 or D2.2; /T/ by /R/; /R/ by /R/ or K28.5; and
// /S/ comes after an idle set, an /X/ set or /R/. A stream decrypted with a
// misaligned or wrong keystream, or a ciphertext read in clear, is close to
// uniform over the 267 symbols and breaks these rules about nine times in 267
// symbols. Each break is a violation. (Half-duplex carrier-extension bursts,
// /R/ followed by /S/... without idles in between, are not expected.) The
// first violation opens a window of WINDOW symbols; if THRESH violations fall
// in it, an alarm pulse is issued when the window closes, so the alarm comes
// WINDOW symbols after the fault shows (267 symbols = 2.136 us at 125 MHz, the
// detection time the paper reports). A single bit error (one violation) does
// not raise an alarm with THRESH = 2. The paper gives only the detection time;
// the rule, THRESH and the list of legal codes are this design's choice.
// The alarm is `sync_loss` if the receiver was decrypting at the window's end,
// `mismatch` (the far end ciphers, this one does not) otherwise.
module sync_monitor
  import physec_pkg::*;
#(
  parameter int unsigned WINDOW = 267,
  parameter int unsigned THRESH = 2
) (
  input  logic clk,
  input  logic rst,
  input  sym_t din,
  input  logic decrypting,
  output logic sync_loss,
  output logic mismatch
);

  localparam int unsigned CW = $clog2(WINDOW + 1);

  sym_t          prev_q;
  logic          viol;
  logic          open_q;
  logic [CW-1:0] age_q, cnt_q;

  localparam sym_t SYM_S = '{k: 1'b1, d: K27_7};
  localparam sym_t SYM_T = '{k: 1'b1, d: K29_7};
  localparam sym_t SYM_R = '{k: 1'b1, d: K23_7};

  always_comb begin
    viol = 1'b0;
    // control codes that never appear
    if (din.k && !(din.d inside {K28_5, K27_7, K29_7, K23_7, K30_7, K28_1})) viol = 1'b1;
    // K28.5 starts /I1/, /I2/, /C1/ or /C2/
    if (prev_q == SYM_COMMA && (din.k || !(din.d inside {D5_6, D16_2, D21_5, D2_2}))) viol = 1'b1;
    // /T/ is followed by /R/; /R/ by /R/ or an idle set
    if (prev_q == SYM_T && din != SYM_R) viol = 1'b1;
    if (prev_q == SYM_R && din != SYM_R && din != SYM_COMMA) viol = 1'b1;
    // /S/ follows an idle set, the end of /X/ or /R/
    if (din == SYM_S && !(prev_q == SYM_R ||
        (!prev_q.k && (prev_q.d inside {D5_6, D16_2, D21_2})))) viol = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      prev_q    <= SYM_I2D;
      open_q    <= 1'b0;
      age_q     <= '0;
      cnt_q     <= '0;
      sync_loss <= 1'b0;
      mismatch  <= 1'b0;
    end else begin
      prev_q    <= din;
      sync_loss <= 1'b0;
      mismatch  <= 1'b0;
      if (!open_q) begin
        if (viol) begin
          open_q <= 1'b1;
          age_q  <= CW'(1);
          cnt_q  <= CW'(1);
        end
      end else begin
        age_q <= age_q + 1'b1;
        if (viol) cnt_q <= cnt_q + 1'b1;
        if (age_q == CW'(WINDOW - 1)) begin
          open_q <= 1'b0;
          if (cnt_q + CW'(viol) >= CW'(THRESH)) begin
            sync_loss <= decrypting;
            mismatch  <= !decrypting;
          end
        end
      end
    end
  end

endmodule
