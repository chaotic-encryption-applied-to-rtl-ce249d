// insert_machine: puts control messages onto the TX symbol stream in place
// of idle ordered sets (PIPELINE, FSM INSERT and MUX of the INSERT block).
//
// Symbols from the TX PCS controller run through a LATENCY-1 stage pipeline
// followed by the output register, LATENCY = 18 cycles in all as in the paper.
// While a whole message waits in the buffer, the machine watches the last
// MSG_LEN pipeline positions; when they hold MSG_LEN/2 idle ordered sets
// (/I1/ = K28.5 D5.6 or /I2/ = K28.5 D16.2) starting on a set boundary, the
// output mux switches to the buffer for MSG_LEN cycles, during which those
// idles leave the pipeline unused, and then switches back. The stream thus
// keeps its length and latency; only idles are ever replaced. Watching the
// tail of the pipeline is this design's choice.
module insert_machine
  import physec_pkg::*;
#(
  parameter int unsigned LATENCY = 18,
  parameter int unsigned MLEN    = MSG_LEN
) (
  input  logic clk,
  input  logic rst,
  input  sym_t din,
  input  logic msg_avail,
  output logic rd_en,
  input  sym_t rd_sym,
  output sym_t dout,
  output logic inserting
);

  localparam int unsigned PIPE = LATENCY - 1;

  typedef enum logic [0:0] {S_PASS, S_INSERT} state_t;

  sym_t   pipe_q [PIPE];
  state_t state_q;
  logic [$clog2(MLEN+1)-1:0] cnt_q;
  logic   idles;

  // MLEN/2 idle sets at the tail, the oldest at pipe_q[PIPE-1].
  always_comb begin
    idles = 1'b1;
    for (int i = 0; i < MLEN / 2; i++)
      if (!is_idle(pipe_q[PIPE-1-2*i], pipe_q[PIPE-2-2*i])) idles = 1'b0;
  end

  logic start;
  assign start     = state_q == S_PASS && msg_avail && idles;
  assign inserting = start || state_q == S_INSERT;
  assign rd_en     = inserting;

  always_ff @(posedge clk) begin
    if (rst) begin
      state_q <= S_PASS;
      cnt_q   <= '0;
      dout    <= SYM_I2D;
      for (int i = 0; i < PIPE; i++) pipe_q[i] <= SYM_I2D;
    end else begin
      pipe_q[0] <= din;
      for (int i = 1; i < PIPE; i++) pipe_q[i] <= pipe_q[i-1];
      dout <= inserting ? rd_sym : pipe_q[PIPE-1];
      case (state_q)
        S_PASS: if (start) begin
          state_q <= S_INSERT;
          cnt_q   <= 1;
        end
        S_INSERT: begin
          cnt_q <= cnt_q + 1'b1;
          if (cnt_q == $bits(cnt_q)'(MLEN - 1)) state_q <= S_PASS;
        end
        default: state_q <= S_PASS;
      endcase
    end
  end

endmodule
