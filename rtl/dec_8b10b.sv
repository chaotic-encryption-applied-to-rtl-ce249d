// dec_8b10b: the 1000BASE-X 8b10b decoder that precedes CIPHER_OP_RX.
//
// Each clock one aligned 10-bit code-group is turned back into a symbol
// {K, octet}. The symbol is found from the sub-blocks, then coded again at the
// current running disparity: if that gives the received code-group, it was
// valid; if only the opposite disparity gives it, `disp_err` is raised and the
// running disparity follows the received code; otherwise `code_err` is raised
// (for example K28.7 at the input of a cipher, or a bit error) and the running
// disparity follows the sign of the code-group's imbalance. Word alignment
// (comma detection) happens before this block. Interface: `din` (bit 9
// received first), `dout`, `code_err`, `disp_err` one clock later. The code is
// the standard's; the error handling is this design's simple choice.
module dec_8b10b
  import physec_pkg::*;
  import code8b10b_pkg::*;
(
  input  logic       clk,
  input  logic       rst,
  input  logic [9:0] din,
  output sym_t       dout,
  output logic       code_err,
  output logic       disp_err
);
  logic        rd_q;
  sym_t        s;
  logic [10:0] e_cur, e_opp;
  logic [3:0]  ones;

  assign s     = decode(din);
  assign e_cur = encode(s, rd_q);
  assign e_opp = encode(s, !rd_q);
  assign ones  = 4'($countones(din));

  always_ff @(posedge clk) begin
    if (rst) begin
      rd_q     <= 1'b0;
      dout     <= SYM_I2D;
      code_err <= 1'b0;
      disp_err <= 1'b0;
    end else begin
      dout     <= s;
      code_err <= 1'b0;
      disp_err <= 1'b0;
      if (e_cur[9:0] == din) begin
        rd_q <= e_cur[10];
      end else if (e_opp[9:0] == din) begin
        disp_err <= 1'b1;
        rd_q     <= e_opp[10];
      end else begin
        code_err <= 1'b1;
        if (ones > 4'd5) rd_q <= 1'b1;
        else if (ones < 4'd5) rd_q <= 1'b0;
      end
    end
  end
endmodule
