// hog_svm_top: single-scale HOG+SVM pedestrian detector for a 4-pixel-per-clock greyscale video
// stream (3840x2160 at 60 frames/s needs about 150 MHz).
//
// Data path, all streaming, no frame buffer:
//   context_gen    3x3 neighbourhood of each pixel (two line delays)
//   gradient_unit  approximate magnitude and orientation interval per pixel
//   cell_histogram 9-bin histograms of 8x8 cells in a register bank
//   block_norm     2x2-cell blocks, two L2 normalisations with the fast inverse square root
//   svm_feeder     four cell queues, one cell per cycle into the SVM
//   svm_classifier 15x7 processing elements, one score per 64x128 window
//   bbox_bram      list of detections for the processor (non-maximum suppression in software)
//   draw_bbox      outlines of the processor's filtered boxes drawn into the passing video
// The processor itself is outside: its side of bbox_bram and of the draw_bbox box table are
// ports here. The input has ready/valid flow control only because the context generator
// pauses the input for one line at the end of each frame to flush its last line; the output
// video and the score stream have no back-pressure. The status outputs of block_norm (a clip
// occurred), svm_feeder (queue fill level) and draw_bbox (pixel replaced) are kept as internal
// nets for observation and drive nothing, which lint reports as unused.
module hog_svm_top
  import hog_pkg::*;
#(
  parameter int unsigned WIDTH        = 3840,
  parameter int unsigned HEIGHT       = 2160,
  parameter logic signed [SCORE_W-1:0] BIAS = '0,
  parameter int unsigned FEEDER_DEPTH = 256,
  parameter int unsigned BBOX_DEPTH   = 1024,
  parameter int unsigned MAX_BOXES    = 16
) (
  input  logic                 clk,
  input  logic                 rst,
  // video in (AXI4-Stream, tuser = start of frame, tlast = end of line)
  input  logic [PPC*PIX_W-1:0] s_axis_tdata,
  input  logic                 s_axis_tvalid,
  output logic                 s_axis_tready,
  input  logic                 s_axis_tuser,
  input  logic                 s_axis_tlast,
  // video out with boxes drawn
  output logic [PPC*PIX_W-1:0] m_axis_tdata,
  output logic                 m_axis_tvalid,
  output logic                 m_axis_tuser,
  output logic                 m_axis_tlast,
  // window scores
  output logic                 score_valid,
  output score_t               score,
  output coord_t               win_x,
  output coord_t               win_y,
  // processor: detection list
  input  logic                 bb_rd_en,
  input  logic [$clog2(BBOX_DEPTH)-1:0] bb_rd_addr,
  output logic [2*COORD_W+SCORE_W-1:0]  bb_rd_data,
  output logic [$clog2(BBOX_DEPTH+1)-1:0] bb_frame_count,
  output logic                 bb_overflow,
  output logic                 bb_done_irq,
  // processor: boxes to draw
  input  logic                 box_we,
  input  logic [$clog2(MAX_BOXES)-1:0] box_idx,
  input  logic                 box_en,
  input  coord_t               box_x0, box_y0, box_x1, box_y1
);
  // ---- context ----
  logic            ctx_valid;
  ctx3_t [PPC-1:0] ctx;
  coord_t          ctx_vx, ctx_y;
  context_gen #(.WIDTH(WIDTH), .HEIGHT(HEIGHT)) u_ctx (
    .clk, .rst, .s_valid(s_axis_tvalid), .s_ready(s_axis_tready), .s_data(s_axis_tdata),
    .s_sof(s_axis_tuser), .m_valid(ctx_valid), .m_ctx(ctx), .m_vx(ctx_vx), .m_y(ctx_y));

  // ---- gradient ----
  logic            g_valid;
  grad_t [PPC-1:0] grad;
  coord_t          g_vx, g_y;
  gradient_unit u_grad (
    .clk, .rst, .in_valid(ctx_valid), .in_ctx(ctx), .in_vx(ctx_vx), .in_y(ctx_y),
    .out_valid(g_valid), .out_grad(grad), .out_vx(g_vx), .out_y(g_y));

  // ---- cell histograms ----
  logic       h_valid;
  cell_hist_t hist;
  coord_t     h_cx, h_cy;
  cell_histogram #(.WIDTH(WIDTH)) u_hist (
    .clk, .rst, .in_valid(g_valid), .in_grad(grad), .in_vx(g_vx), .in_y(g_y),
    .out_valid(h_valid), .out_hist(hist), .out_cx(h_cx), .out_cy(h_cy));

  // ---- block normalisation ----
  logic        n_valid, n_clip;
  block_feat_t feat;
  coord_t      n_bx, n_by;
  block_norm #(.WIDTH(WIDTH)) u_norm (
    .clk, .rst, .in_valid(h_valid), .in_hist(hist), .in_cx(h_cx), .in_cy(h_cy),
    .out_valid(n_valid), .out_feat(feat), .out_bx(n_bx), .out_by(n_by), .clip_seen(n_clip));

  // ---- SVM ----
  logic       f_valid;
  logic [1:0] f_cell;
  cell_feat_t f_feat;
  coord_t     f_bx, f_by;
  logic [$clog2(FEEDER_DEPTH+1)-1:0] f_backlog;
  svm_feeder #(.DEPTH(FEEDER_DEPTH)) u_feed (
    .clk, .rst, .in_valid(n_valid), .in_feat(feat), .in_bx(n_bx), .in_by(n_by),
    .out_valid(f_valid), .out_cell(f_cell), .out_feat(f_feat), .out_bx(f_bx), .out_by(f_by),
    .backlog(f_backlog));

  logic det_valid, fr_start, fr_done;
  svm_classifier #(.WIDTH(WIDTH), .HEIGHT(HEIGHT), .BIAS(BIAS)) u_svm (
    .clk, .rst, .in_valid(f_valid), .in_cell(f_cell), .in_feat(f_feat), .in_bx(f_bx),
    .in_by(f_by), .score_valid, .score, .win_x, .win_y, .det_valid,
    .frame_start(fr_start), .frame_done(fr_done));

  // ---- detections for the processor ----
  bbox_bram #(.DEPTH(BBOX_DEPTH)) u_bbox (
    .clk, .rst, .frame_start(fr_start), .frame_done(fr_done), .det_valid,
    .det_x(win_x), .det_y(win_y), .det_score(score),
    .rd_en(bb_rd_en), .rd_addr(bb_rd_addr), .rd_data(bb_rd_data),
    .frame_count(bb_frame_count), .overflow(bb_overflow), .done_irq(bb_done_irq));

  // ---- output video ----
  logic drawn;
  draw_bbox #(.WIDTH(WIDTH), .MAX_BOXES(MAX_BOXES)) u_draw (
    .clk, .rst, .box_we, .box_idx, .box_en, .box_x0, .box_y0, .box_x1, .box_y1,
    .s_valid(s_axis_tvalid && s_axis_tready), .s_data(s_axis_tdata), .s_sof(s_axis_tuser),
    .s_eol(s_axis_tlast), .m_valid(m_axis_tvalid), .m_data(m_axis_tdata), .m_sof(m_axis_tuser),
    .m_eol(m_axis_tlast), .drawn);
endmodule
