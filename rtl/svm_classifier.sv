// svm_classifier: linear SVM over every 64x128-pixel window (7x15 blocks) of the frame,
// computed as a pipeline of 15 rows x 7 processing elements (svm_ep).
//
// Every element sees every block. Element (y, x) weights the block with the coefficients of
// window position (y, x) and adds the partial score that element (y, x-1) produced for the
// previous block, so the right-most element of row y holds, after block (R, c), the sum of
// window row y for the window whose left block column is c-6. That partial score is delayed by
// one row of blocks less six blocks (a line_delay of NBX-8 steps plus two registers)
// and enters the first element of row y+1 exactly when block (R+1, c-6) arrives. After row 15
// the bias is added: the result is the score of the window whose top-left block is
// (R-14, c-6), i.e. pixel (8*(c-6), 8*(R-14)). Partial sums that wrap around a row end belong
// only to windows that would leave the frame; those scores are not sent out.
// A window is a detection when its score is above zero.
//
// Input: the cell stream of svm_feeder (4 cycles per block). Output: one score per window in
// raster order, with the window's pixel position; frame_start/frame_done mark the first and
// last block of a frame.
module svm_classifier
  import hog_pkg::*;
#(
  parameter int unsigned WIDTH     = 3840,
  parameter int unsigned HEIGHT    = 2160,
  parameter logic signed [SCORE_W-1:0] BIAS = '0,
  parameter string       COEF_DIR  = ""    // if set: files <dir>/ep_<y>_<x>.hex
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        in_valid,
  input  logic [1:0]  in_cell,
  input  cell_feat_t  in_feat,
  input  coord_t      in_bx,
  input  coord_t      in_by,
  output logic        score_valid,
  output score_t      score,
  output coord_t      win_x,      // top-left pixel of the window
  output coord_t      win_y,
  output logic        det_valid,  // score_valid and score > 0
  output logic        frame_start,
  output logic        frame_done
);
  localparam int unsigned NBX = WIDTH / CELL - 1;    // blocks per row
  localparam int unsigned NBY = HEIGHT / CELL - 1;   // block rows
  // Block-row delay between element rows: NBX-6 blocks in all, two of them are the registers
  // at the write and read side of the delay.
  localparam int unsigned DLY = NBX - WIN_BX - 1;

  score_t ep_out  [WIN_BY][WIN_BX];
  score_t row_in  [WIN_BY];
  logic   ep_done [WIN_BY][WIN_BX];

  assign row_in[0] = '0;

  for (genvar y = 0; y < int'(WIN_BY); y++) begin : g_row
    for (genvar x = 0; x < int'(WIN_BX); x++) begin : g_col
      svm_ep #(
        .BY(y), .BX(x),
        .COEF_FILE(COEF_DIR == "" ? "" : $sformatf("%s/ep_%0d_%0d.hex", COEF_DIR, y, x))
      ) u_ep (
        .clk, .rst, .in_valid, .in_cell, .in_feat,
        .left_sum(x == 0 ? row_in[y] : ep_out[y][x-1]),
        .out_sum(ep_out[y][x]),
        .blk_done(ep_done[y][x])
      );
    end
    if (y > 0) begin : g_dly
      // Enabled at the block's completion, i.e. in the cycle its last cell is accumulated.
      line_delay #(.WIDTH(SCORE_W), .DEPTH(DLY)) u_dly (
        .clk, .en(blk_last), .din(ep_out[y-1][WIN_BX-1]), .dout(row_in[y]));
    end
  end

  // Track the block coordinates through the element pipeline (2 stages).
  logic   s1_valid, blk_last, done_d;
  logic [1:0] s1_cell;
  coord_t s1_bx, s1_by, s2_bx, s2_by;
  always_ff @(posedge clk) begin
    if (rst) begin
      s1_valid <= 1'b0;
      done_d   <= 1'b0;
    end else begin
      s1_valid <= in_valid;
      done_d   <= blk_last;
    end
    s1_cell <= in_cell;
    s1_bx   <= in_bx;
    s1_by   <= in_by;
    if (blk_last) begin
      s2_bx <= s1_bx;
      s2_by <= s1_by;
    end
  end
  assign blk_last = s1_valid && s1_cell == 2'd3;

  // ep_out of the last row is valid in the cycle after blk_last (done_d).
  always_ff @(posedge clk) begin
    if (rst) begin
      score_valid <= 1'b0;
      det_valid   <= 1'b0;
      frame_start <= 1'b0;
      frame_done  <= 1'b0;
    end else begin
      score_valid <= done_d && s2_bx >= coord_t'(WIN_BX - 1) && s2_by >= coord_t'(WIN_BY - 1);
      det_valid   <= done_d && s2_bx >= coord_t'(WIN_BX - 1) && s2_by >= coord_t'(WIN_BY - 1)
                     && (ep_out[WIN_BY-1][WIN_BX-1] + BIAS) > 0;
      frame_start <= done_d && s2_bx == '0 && s2_by == '0;
      frame_done  <= done_d && s2_bx == coord_t'(NBX - 1) && s2_by == coord_t'(NBY - 1);
    end
    score <= ep_out[WIN_BY-1][WIN_BX-1] + BIAS;
    win_x <= coord_t'((int'(s2_bx) - int'(WIN_BX) + 1) * int'(CELL));
    win_y <= coord_t'((int'(s2_by) - int'(WIN_BY) + 1) * int'(CELL));
  end

  // Each row of elements works in lock-step; a wrong order would mix windows.
  always_ff @(posedge clk)
    if (!rst) assert (ep_done[0][0] == done_d) else $error("svm_classifier: element out of step");
endmodule
