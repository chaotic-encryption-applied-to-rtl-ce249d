// keystream_gen: the PHYsec keystream generator, one value 0..266 per clock.
//
// A bank of nine chaotic cells (stm_cell), eight producing 8 bits and one 9
// bits, all perturbed by one shared 61-bit LFSR, gives a 73-bit word per clock
// (cell j at bits [8j+7:8j], the 9-bit cell at [72:64]; the order is this
// design's choice). The word is 64 bits wider than the 9-bit result so that
// the reduction modulo 267 (mod267, 65 pipeline stages) adds no visible bias.
//
// Synchronisation: after `load` the cells compute their reciprocals, then the
// whole chain (LFSR, cells, word register, MOD-267) runs until the first value
// reaches the output; from then on `ready` is high, `ks` holds the current
// value and the chain moves one step only in a cycle with `advance` high, so
// `ks` shows the next value one clock later. Generators at both ends of a link
// loaded with the same key therefore deliver the same sequence, one value per
// ciphered symbol, however long they wait for the start of encryption.
// `load` also restarts a running generator (the paper's "stop and restart").
module keystream_gen
  import physec_pkg::*;
#(
  parameter int unsigned CELLS = N_CELLS,
  parameter int unsigned W     = WORD_W
) (
  input  logic       clk,
  input  logic       rst,
  input  logic       load,
  input  key_t       key,
  input  logic       advance,
  output logic       ready,
  output logic [8:0] ks
);

  logic [W-1:0]     pert;
  logic [W-1:0]     word;
  logic [CELLS-1:0] cell_rdy;
  logic             cells_ready;
  logic             word_v_q;
  logic [W-1:0]     word_q;
  logic             mod_v;
  logic             ce;

  assign cells_ready = &cell_rdy;
  // Run freely while priming, then step on demand.
  assign ce    = cells_ready && (!mod_v || advance);
  assign ready = mod_v;

  lfsr61 #(.LEN(LFSR_LEN), .OUT_W(W)) u_lfsr (
    .clk (clk), .load(load), .ce(ce), .seed(key.y0), .bits(pert)
  );

  for (genvar j = 0; j < CELLS; j++) begin : g_cell
    localparam int unsigned LO = 8 * j;
    localparam int unsigned CW = (j == CELLS - 1) ? W - 8 * (CELLS - 1) : 8;
    stm_cell #(.W(CW)) u_cell (
      .clk  (clk),
      .rst  (rst),
      .load (load),
      .gamma(key.gamma[j]),
      .x0   (key.x0[j]),
      .ce   (ce),
      .pert (pert[LO +: CW]),
      .ready(cell_rdy[j]),
      .out  (word[LO +: CW])
    );
  end

  // Iteration k of the cells is perturbed by the bits of LFSR step k-1 (the
  // first iteration after a load by zeros). The word register skips the
  // state present before the first iteration (x0 itself).
  logic started_q;
  always_ff @(posedge clk) begin
    if (rst || load) begin
      started_q <= 1'b0;
      word_v_q  <= 1'b0;
      word_q    <= '0;
    end else if (ce) begin
      started_q <= 1'b1;
      word_v_q  <= started_q;
      word_q    <= word;
    end
  end

  mod267 #(.IN_W(W)) u_mod (
    .clk      (clk),
    .rst      (rst || load),
    .ce       (ce),
    .in_valid (word_v_q),
    .x        (word_q),
    .out_valid(mod_v),
    .y        (ks)
  );

endmodule
