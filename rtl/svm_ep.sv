// svm_ep: one processing element of the SVM array, responsible for one block position
// (row BY, column BX) of the 7x15-block detection window.
//
// It holds the 36 coefficients w of its block position in a small ROM. Each cycle the broadcast
// cell vector (9 features) is multiplied by the 9 coefficients of that cell (index in_cell) and
// the products are summed. Over the four cells of a block the sums are accumulated; with the
// fourth the element adds the partial score coming from its left neighbour (or from the
// block-row delay, for the first element of a row) and stores the result in out_sum, which the
// right neighbour reads on the next block. out_sum thus advances once per block.
// Coefficients: read from COEF_FILE with $readmemh (36 hex words, feature order 9*cell + bin) if
// a file is named, otherwise the deterministic stand-in pattern svm_default_coef().
// Timing: one register stage for the products, then the accumulator; out_sum changes in the
// cycle after the block's fourth cell entered plus one.
module svm_ep
  import hog_pkg::*;
#(
  parameter int unsigned BY        = 0,
  parameter int unsigned BX        = 0,
  parameter string       COEF_FILE = ""
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        in_valid,
  input  logic [1:0]  in_cell,
  input  cell_feat_t  in_feat,
  input  score_t      left_sum,    // sampled when the block completes
  output score_t      out_sum,
  output logic        blk_done     // out_sum updated this cycle (1-cycle pulse, one cycle later)
);
  localparam int unsigned PROD_W = FEAT_W + COEF_W;   // 21
  localparam int unsigned DOT_W  = PROD_W + 4;        // 9 products
  localparam int unsigned ACC_W  = DOT_W + 2;         // 4 cells

  coef_t rom [BLK_FEAT];
  initial begin
    if (COEF_FILE != "") $readmemh(COEF_FILE, rom);
    else for (int f = 0; f < int'(BLK_FEAT); f++) rom[f] = svm_default_coef(BY, BX, f);
  end

  // Stage 1: 9 products of the current cell and their sum.
  logic                    s1_valid;
  logic [1:0]              s1_cell;
  logic signed [DOT_W-1:0] s1_dot;
  always_ff @(posedge clk) begin
    if (rst) s1_valid <= 1'b0;
    else     s1_valid <= in_valid;
    if (in_valid) begin
      logic signed [DOT_W-1:0] s;
      s = '0;
      for (int i = 0; i < int'(NBINS); i++)
        s = s + DOT_W'($signed({1'b0, in_feat[i]}) * rom[9 * int'(in_cell) + i]);
      s1_dot  <= s;
      s1_cell <= in_cell;
    end
  end

  // Stage 2: accumulate over the block; add the left partial score on the last cell.
  logic signed [ACC_W-1:0] acc;
  always_ff @(posedge clk) begin
    if (rst) begin
      acc      <= '0;
      blk_done <= 1'b0;
      out_sum  <= '0;
    end else begin
      blk_done <= s1_valid && s1_cell == 2'd3;
      if (s1_valid) begin
        if (s1_cell == 2'd0)      acc <= ACC_W'(s1_dot);
        else if (s1_cell != 2'd3) acc <= acc + ACC_W'(s1_dot);
        else                      out_sum <= left_sum + SCORE_W'(acc) + SCORE_W'(s1_dot);
      end
    end
  end
endmodule
