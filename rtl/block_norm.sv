// block_norm: L2-Hys normalisation of overlapping 2x2-cell blocks, one 36-element feature
// vector per block.
//
// Cell histograms arrive in raster order of cells. For each cell the squares of its 9 bins are
// summed by a tree; histogram and sum go into a one-cell-row delay line (block RAM, read-first),
// which returns the same column of the row above. The two sums of a cell column are added
// ("two cells"), and adding the two-cell sum of the previous column gives the sum of squares of
// the whole block (42 bits, 8 fractional). Blocks overlap by one cell in both directions, so a
// block is complete at every cell with cx >= 1 and cy >= 1; it is block (cx-1, cy-1).
// The block sum goes through the fast inverse square root while the four histograms wait in a
// FIFO; a second FIFO takes the inverse roots, and whenever both queues hold an entry they are
// read together (the synchronisation signal) and the 36 values are multiplied by the root,
// giving 10-bit features with 9 fractional bits. The features are clipped at 0.2, squared and
// summed again, and a second inverse root (22 bits, 16 fractional) scales them once more.
// The small epsilon of the textbook formula is left out: an all-zero block gives all-zero features.
//
// Feature order within the block vector: cells top-left, top-right, bottom-left, bottom-right,
// 9 bins each, bin 0 first (feature f = 9*cell + bin).
// Timing: one cell per cycle at most; the output follows a block's last cell by a fixed
// 1 + 1 + 5 + 1 + 1 + 1 + 5 + 1 cycles as long as the queues are not backed up.
module block_norm
  import hog_pkg::*;
#(
  parameter int unsigned WIDTH      = 3840,
  parameter int unsigned FIFO_DEPTH = 16
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        in_valid,
  input  cell_hist_t  in_hist,
  input  coord_t      in_cx,
  input  coord_t      in_cy,
  output logic        out_valid,
  output block_feat_t out_feat,
  output coord_t      out_bx,
  output coord_t      out_by,
  output logic        clip_seen     // a feature was clipped at 0.2 (event flag, one cycle)
);
  localparam int unsigned NCX  = WIDTH / CELL;
  localparam int unsigned CSQ_W = 2 * HIST_W + 4;     // 40-bit sum of 9 squares

  typedef struct packed {
    cell_hist_t         hist;
    logic [CSQ_W-1:0]   sq;
  } dl_word_t;

  typedef struct packed {
    cell_hist_t [3:0] cells;   // [0]=TL, [1]=TR, [2]=BL, [3]=BR
    coord_t           bx, by;
  } blk_t;

  // ---- Stage A: cell sum of squares and the cell-row delay line ----
  function automatic logic [CSQ_W-1:0] cell_sq(cell_hist_t h);
    logic [CSQ_W-1:0] s;
    s = '0;
    for (int b = 0; b < int'(NBINS); b++) s = s + CSQ_W'(h[b] * h[b]);
    return s;
  endfunction

  dl_word_t         dl_mem [NCX];
  logic             a_valid;
  cell_hist_t       a_cur;
  logic [CSQ_W-1:0] a_cursq;
  dl_word_t         a_up;
  coord_t           a_cx, a_cy;

  always_ff @(posedge clk) begin
    if (rst) a_valid <= 1'b0;
    else     a_valid <= in_valid;
    if (in_valid) begin
      dl_word_t w;
      w.hist = in_hist;
      w.sq   = cell_sq(in_hist);
      a_up   <= dl_mem[in_cx[$clog2(NCX)-1:0]];
      dl_mem[in_cx[$clog2(NCX)-1:0]] <= w;
      a_cur   <= in_hist;
      a_cursq <= w.sq;
      a_cx    <= in_cx;
      a_cy    <= in_cy;
    end
  end

  // ---- Stage B: two-cell and block sums, block assembly ----
  logic [CSQ_W:0]   two_sum, l_two;
  cell_hist_t       l_cur, l_up;
  logic             b_push;
  blk_t             b_blk;
  logic [SQ1_W-1:0] b_sum;

  assign two_sum = (CSQ_W+1)'(a_cursq) + (CSQ_W+1)'(a_up.sq);

  always_ff @(posedge clk) begin
    if (rst) b_push <= 1'b0;
    else     b_push <= a_valid && a_cx != 0 && a_cy != 0;
    if (a_valid) begin
      l_cur <= a_cur;
      l_up  <= a_up.hist;
      l_two <= two_sum;
      b_blk.cells <= {a_cur, l_cur, a_up.hist, l_up};
      b_blk.bx    <= a_cx - 1'b1;
      b_blk.by    <= a_cy - 1'b1;
      b_sum       <= SQ1_W'(two_sum) + SQ1_W'(l_two);
    end
  end

  // ---- First inverse square root and the two synchronised queues ----
  logic             isq1_valid;
  logic [ISQ1_W-1:0] isq1;
  fast_invsqrt #(.IN_W(SQ1_W), .IN_FRAC(SQ1_FRAC), .OUT_W(ISQ1_W), .OUT_FRAC(ISQ1_FRAC)) u_isq1 (
    .clk, .rst, .in_valid(b_push), .in_x(b_sum), .out_valid(isq1_valid), .out_y(isq1));

  logic  hq_empty, iq_empty, hq_full, iq_full, sync_pop;
  blk_t  hq_dout;
  logic [ISQ1_W-1:0] iq_dout;

  sync_fifo #(.WIDTH($bits(blk_t)), .DEPTH(FIFO_DEPTH)) u_hist_q (
    .clk, .rst, .push(b_push), .din(b_blk), .pop(sync_pop), .dout(hq_dout),
    .empty(hq_empty), .full(hq_full), .count());
  sync_fifo #(.WIDTH(ISQ1_W), .DEPTH(FIFO_DEPTH)) u_isq_q (
    .clk, .rst, .push(isq1_valid), .din(isq1), .pop(sync_pop), .dout(iq_dout),
    .empty(iq_empty), .full(iq_full), .count());

  assign sync_pop = !hq_empty && !iq_empty;

  // ---- Stage C: first normalisation and clipping ----
  logic        c_valid;
  block_feat_t c_feat;
  coord_t      c_bx, c_by;
  logic        c_clip;

  always_ff @(posedge clk) begin
    if (rst) c_valid <= 1'b0;
    else     c_valid <= sync_pop;
    c_clip <= 1'b0;
    if (sync_pop) begin
      c_bx <= hq_dout.bx;
      c_by <= hq_dout.by;
      for (int c = 0; c < 4; c++)
        for (int b = 0; b < int'(NBINS); b++) begin
          logic [HIST_W+ISQ1_W-1:0] p;
          logic [HIST_W+ISQ1_W-1:0] f;
          p = (HIST_W+ISQ1_W)'(hq_dout.cells[c][b]) * (HIST_W+ISQ1_W)'(iq_dout);
          f = p >> (HIST_FRAC + ISQ1_FRAC - FEAT_FRAC);
          // saturate to the 10/9 format, then clip at 0.2
          if (f > (HIST_W+ISQ1_W)'(FEAT_CLIP)) begin
            c_feat[9*c+b] <= FEAT_CLIP;
            c_clip <= 1'b1;
          end else begin
            c_feat[9*c+b] <= f[FEAT_W-1:0];
          end
        end
    end
  end

  // ---- Stage D: sum of squares of the clipped block ----
  logic              d_valid;
  logic [SQ2_W-1:0]  d_sum;
  block_feat_t       d_feat;
  coord_t            d_bx, d_by;
  always_ff @(posedge clk) begin
    if (rst) d_valid <= 1'b0;
    else     d_valid <= c_valid;
    if (c_valid) begin
      logic [SQ2_W-1:0] s;
      s = '0;
      for (int i = 0; i < int'(BLK_FEAT); i++) s = s + SQ2_W'(c_feat[i] * c_feat[i]);
      d_sum  <= s;
      d_feat <= c_feat;
      d_bx   <= c_bx;
      d_by   <= c_by;
    end
  end

  // ---- Second inverse square root, features wait in a matching 5-stage delay ----
  logic              isq2_valid;
  logic [ISQ2_W-1:0] isq2;
  fast_invsqrt #(.IN_W(SQ2_W), .IN_FRAC(SQ2_FRAC), .OUT_W(ISQ2_W), .OUT_FRAC(ISQ2_FRAC)) u_isq2 (
    .clk, .rst, .in_valid(d_valid), .in_x(d_sum), .out_valid(isq2_valid), .out_y(isq2));

  localparam int unsigned ISQ_LAT = 5;
  block_feat_t dly_feat [ISQ_LAT];
  coord_t      dly_bx [ISQ_LAT];
  coord_t      dly_by [ISQ_LAT];
  always_ff @(posedge clk) begin
    dly_feat[0] <= d_feat;
    dly_bx[0]   <= d_bx;
    dly_by[0]   <= d_by;
    for (int i = 1; i < int'(ISQ_LAT); i++) begin
      dly_feat[i] <= dly_feat[i-1];
      dly_bx[i]   <= dly_bx[i-1];
      dly_by[i]   <= dly_by[i-1];
    end
  end

  // ---- Stage E: second normalisation ----
  always_ff @(posedge clk) begin
    if (rst) out_valid <= 1'b0;
    else     out_valid <= isq2_valid;
    if (isq2_valid) begin
      out_bx <= dly_bx[ISQ_LAT-1];
      out_by <= dly_by[ISQ_LAT-1];
      for (int i = 0; i < int'(BLK_FEAT); i++) begin
        logic [FEAT_W+ISQ2_W-1:0] p, f;
        p = (FEAT_W+ISQ2_W)'(dly_feat[ISQ_LAT-1][i]) * (FEAT_W+ISQ2_W)'(isq2);
        f = p >> ISQ2_FRAC;
        out_feat[i] <= (f > (FEAT_W+ISQ2_W)'({FEAT_W{1'b1}})) ? '1 : f[FEAT_W-1:0];
      end
    end
  end

  assign clip_seen = c_clip;

  always_ff @(posedge clk)
    if (!rst) begin
      assert (!(b_push && hq_full))     else $error("block_norm: histogram queue overflow");
      assert (!(isq1_valid && iq_full)) else $error("block_norm: inverse-root queue overflow");
    end
endmodule
