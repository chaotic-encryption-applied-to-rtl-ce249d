// physec: PHYsec, stream encryption of the 1000BASE-X 8b10b symbol flow,
// placed in the PCS between the PCS controllers and the 8b10b encoder/decoder.
//
// Transmit side (clk_tx, the system clock): symbols from the TX PCS controller
// go through tx_encrypt (INSERT, CAPTURE, CIPHER_OP_TX), 24 cycles, and the
// 8b10b encoder, one more, to `tx_code`; once an /X/ set has passed, every
// following symbol, idles and frames alike, is replaced by
// (symbol + keystream) mod 267, mapped back to a valid code-group. Receive
// side (clk_rx, the recovered clock): aligned code-groups are decoded (one
// cycle) and go through rx_decrypt (CIPHER_OP_RX, CAPTURE, EXTRACT), which
// subtracts the keystream from the symbol after /X/ on and removes /X/ from the
// stream, 11 cycles. Each side has its own keystream generator; the RX one
// must hold the far end's TX key. A sync_monitor on the decrypted RX stream
// reports misalignment, and management (TX clock) ties the control together.
//
// Control: `restart` (re)loads both generators and turns both ciphers off;
// keys must be stable from `restart` until `tx_ks_ready`/`rx_ks_ready` rise
// (about 135 cycles). `x_req` sends one /X/ set, which toggles the cipher at
// both ends of the link. Alarms latch until `alarm_clear`; clear them no
// sooner than one monitor window (267 symbols) after a restart. Status levels
// from the RX domain are synchronised to clk_tx; `rx_code_err` and
// `rx_disp_err` are raw decoder flags in the clk_rx domain. One symbol per
// clock on each side. The encryption blocks follow the paper's structure; the
// 8b10b code is the standard's, and the clock crossings are this design's.
module physec
  import physec_pkg::*;
(
  input  logic        clk_tx,
  input  logic        rst_tx,
  input  logic        clk_rx,
  input  logic        rst_rx,
  // TX datapath: symbols from the PCS controller, code-groups to the SERDES
  input  sym_t        tx_din,
  output logic [9:0]  tx_code,
  // RX datapath: aligned code-groups from the SERDES, symbols to the PCS
  input  logic [9:0]  rx_code,
  output sym_t        rx_dout,
  output logic        rx_code_err,
  output logic        rx_disp_err,
  // keys (quasi-static)
  input  key_t        key_tx,
  input  key_t        key_rx,
  // control and status, clk_tx domain
  input  logic        restart,
  input  logic        x_req,
  input  logic        alarm_clear,
  output logic        x_pending,
  output logic        inserting,
  output logic        tx_on,
  output logic        rx_on,
  output logic        tx_ks_ready,
  output logic        rx_ks_ready,
  output logic        alarm_sync,
  output logic        alarm_mismatch,
  output logic [15:0] x_rx_count,
  output logic [15:0] other_rx_count
);

  // ---------------- TX domain ----------------
  logic       tx_ks_load, rx_restart, tx_sync_reset;
  logic       ins_space_ok, ins_wr_en;
  sym_t       ins_wr_sym;
  logic [8:0] tx_ks;
  logic       tx_ks_adv;
  logic       ev_sync_loss, ev_mismatch, ev_x_rx, ev_other_rx;

  keystream_gen u_ks_tx (
    .clk(clk_tx), .rst(rst_tx), .load(tx_ks_load), .key(key_tx),
    .advance(tx_ks_adv), .ready(tx_ks_ready), .ks(tx_ks)
  );

  sym_t       tx_sym;

  tx_encrypt u_tx (
    .clk(clk_tx), .rst(rst_tx), .din(tx_din), .dout(tx_sym),
    .wr_en(ins_wr_en), .wr_sym(ins_wr_sym), .space_ok(ins_space_ok),
    .ks(tx_ks), .ks_ready(tx_ks_ready), .ks_advance(tx_ks_adv),
    .sync_reset(tx_sync_reset), .cipher_on(tx_on), .inserting(inserting)
  );

  enc_8b10b u_enc (.clk(clk_tx), .rst(rst_tx), .din(tx_sym), .dout(tx_code));

  management u_mgmt (
    .clk(clk_tx), .rst(rst_tx),
    .restart(restart), .x_req(x_req), .alarm_clear(alarm_clear),
    .x_pending(x_pending), .alarm_sync(alarm_sync), .alarm_mismatch(alarm_mismatch),
    .x_rx_count(x_rx_count), .other_rx_count(other_rx_count),
    .tx_ks_load(tx_ks_load), .rx_restart(rx_restart), .tx_sync_reset(tx_sync_reset),
    .ins_space_ok(ins_space_ok), .ins_wr_en(ins_wr_en), .ins_wr_sym(ins_wr_sym),
    .ev_sync_loss(ev_sync_loss), .ev_mismatch(ev_mismatch),
    .ev_x_rx(ev_x_rx), .ev_other_rx(ev_other_rx)
  );

  // ---------------- RX domain ----------------
  logic       rx_load;
  logic [8:0] rx_ks;
  logic       rx_ks_adv, rx_ks_rdy_rx, rx_on_rx;
  sym_t       rx_plain;
  logic       rx_sync_loss, rx_mismatch, rx_x, rx_other;

  pulse_sync u_ps_restart (
    .clk_src(clk_tx), .rst_src(rst_tx), .pulse_src(rx_restart),
    .clk_dst(clk_rx), .rst_dst(rst_rx), .pulse_dst(rx_load)
  );

  keystream_gen u_ks_rx (
    .clk(clk_rx), .rst(rst_rx), .load(rx_load), .key(key_rx),
    .advance(rx_ks_adv), .ready(rx_ks_rdy_rx), .ks(rx_ks)
  );

  sym_t       rx_sym;

  dec_8b10b u_dec (
    .clk(clk_rx), .rst(rst_rx), .din(rx_code), .dout(rx_sym),
    .code_err(rx_code_err), .disp_err(rx_disp_err)
  );

  rx_decrypt u_rx (
    .clk(clk_rx), .rst(rst_rx), .din(rx_sym), .dout(rx_dout), .plain(rx_plain),
    .ks(rx_ks), .ks_ready(rx_ks_rdy_rx), .ks_advance(rx_ks_adv),
    .sync_reset(rx_load), .cipher_on(rx_on_rx), .x_rx(rx_x), .other_rx(rx_other)
  );

  sync_monitor u_mon (
    .clk(clk_rx), .rst(rst_rx), .din(rx_plain), .decrypting(rx_on_rx),
    .sync_loss(rx_sync_loss), .mismatch(rx_mismatch)
  );

  // ---------------- RX -> TX crossings ----------------
  pulse_sync u_ps_sl (.clk_src(clk_rx), .rst_src(rst_rx), .pulse_src(rx_sync_loss),
                      .clk_dst(clk_tx), .rst_dst(rst_tx), .pulse_dst(ev_sync_loss));
  pulse_sync u_ps_mm (.clk_src(clk_rx), .rst_src(rst_rx), .pulse_src(rx_mismatch),
                      .clk_dst(clk_tx), .rst_dst(rst_tx), .pulse_dst(ev_mismatch));
  pulse_sync u_ps_x  (.clk_src(clk_rx), .rst_src(rst_rx), .pulse_src(rx_x),
                      .clk_dst(clk_tx), .rst_dst(rst_tx), .pulse_dst(ev_x_rx));
  pulse_sync u_ps_o  (.clk_src(clk_rx), .rst_src(rst_rx), .pulse_src(rx_other),
                      .clk_dst(clk_tx), .rst_dst(rst_tx), .pulse_dst(ev_other_rx));
  level_sync u_ls_on  (.clk(clk_tx), .rst(rst_tx), .d(rx_on_rx),     .q(rx_on));
  level_sync u_ls_rdy (.clk(clk_tx), .rst(rst_tx), .d(rx_ks_rdy_rx), .q(rx_ks_ready));

endmodule
