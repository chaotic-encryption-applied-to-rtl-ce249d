// level_sync: two flip-flop synchroniser for a slowly changing level.
// The output follows the input two destination clock edges later.
module level_sync (
  input  logic clk,
  input  logic rst,
  input  logic d,
  output logic q
);

  logic meta_q;

  always_ff @(posedge clk) begin
    if (rst) {q, meta_q} <= 2'b00;
    else     {q, meta_q} <= {meta_q, d};
  end

endmodule
