// hog_e2e_checker: stimulus and reference checks for the whole detector, shared by the small
// end-to-end testbench and the full-size one (which differ only in frame size).
//
// For each frame it generates a test image (noise, a flat patch, a patch of black/white noise
// and a patch of vertical stripes), streams it in at 4 pixels per clock and checks:
//  - cell histograms (probed inside the design) against a reference built from the image with
//    edge replication, the magnitude formula max(0.875a+0.5b, a) and the same tangent thresholds;
//  - block features against a real-number L2-Hys reference (tolerances as in tb_block_norm);
//  - every window score exactly against the dot product of the design's own features with the
//    coefficients, plus the bias, and the detection flag;
//  - the detection list read back through the processor port against the detections seen;
//  - the output video: equal to the input except white outlines of the boxes written after the
//    previous frame (the processor model takes the first MAX_DRAW detections as its boxes);
//  - the input rate: ready is low exactly LINE+1 cycles per frame (the end-of-frame flush).
// It counts how often each mechanism happened and fails a mechanism that never did.
module hog_e2e_checker
  import hog_pkg::*;
#(
  parameter int unsigned W          = 3840,
  parameter int unsigned H          = 2160,
  parameter int unsigned FRAMES     = 2,
  parameter int unsigned BBOX_DEPTH = 1024,
  parameter int unsigned MAX_BOXES  = 16,
  parameter longint      BIAS       = 0
) (
  input  logic                 clk,
  output logic                 rst,
  output logic [31:0]          s_tdata,
  output logic                 s_tvalid,
  input  logic                 s_tready,
  output logic                 s_tuser,
  output logic                 s_tlast,
  input  logic [31:0]          m_tdata,
  input  logic                 m_tvalid,
  input  logic                 m_tuser,
  input  logic                 m_tlast,
  input  logic                 score_valid,
  input  score_t               score,
  input  coord_t               win_x,
  input  coord_t               win_y,
  output logic                 bb_rd_en,
  output logic [$clog2(BBOX_DEPTH)-1:0] bb_rd_addr,
  input  logic [2*COORD_W+SCORE_W-1:0]  bb_rd_data,
  input  logic [$clog2(BBOX_DEPTH+1)-1:0] bb_frame_count,
  input  logic                 bb_overflow,
  input  logic                 bb_done_irq,
  output logic                 box_we,
  output logic [$clog2(MAX_BOXES)-1:0] box_idx,
  output logic                 box_en,
  output coord_t               box_x0, box_y0, box_x1, box_y1,
  // probes inside the design
  input  logic                 p_grad_valid,
  input  grad_t [PPC-1:0]      p_grad,
  input  logic                 p_hist_valid,
  input  cell_hist_t           p_hist,
  input  coord_t               p_hist_cx, p_hist_cy,
  input  logic                 p_feat_valid,
  input  block_feat_t          p_feat,
  input  coord_t               p_feat_bx, p_feat_by,
  input  logic                 p_clip,
  input  logic [15:0]          p_backlog,
  input  logic                 p_drawn,
  output int                   checks,
  output int                   failures,
  output logic                 done
);
  localparam int LINE = W / 4, NCX = W / 8, NCY = H / 8, NBX = NCX - 1, NBY = NCY - 1;
  localparam int NWX = NBX - 6, NWY = NBY - 14;
  localparam int MAX_DRAW = 4;

  pix_t  img [H][W];
  int    href [NCY][NCX][NBINS];
  feat_t fhw [NBY][NBX][36];
  int    frame = 0;

  // mechanism counters
  int n_flush = 0, n_burst = 0, n_clip = 0, n_wrap = 0, n_sat = 0, n_zero_blk = 0;
  int n_det = 0, n_nondet = 0, n_overflow = 0, n_drawn = 0;

  // ---- image and reference histograms ----
  function automatic pix_t gen(int x, int y);
    if (x < W / 8 + 16 && y < H / 8 + 16)                       return 8'd90;                       // flat
    if (x >= W / 2 && x < W / 2 + W / 6 && y < H / 4)           return $urandom_range(1, 0) ? 8'd255 : 8'd0; // hard noise
    if (x >= W / 4 && x < W / 4 + W / 6 && y >= H / 2)          return ((x / 3) % 2) ? 8'd220 : 8'd30;    // stripes
    return pix_t'($urandom_range(255, 0) / ((x / 16 + y / 16) % 4 + 1));
  endfunction

  function automatic pix_t px(int x, int y);
    if (x < 0) x = 0;
    if (x > int'(W) - 1) x = W - 1;
    if (y < 0) y = 0;
    if (y > int'(H) - 1) y = H - 1;
    return img[y][x];
  endfunction

  task automatic build_frame();
    for (int y = 0; y < int'(H); y++)
      for (int x = 0; x < int'(W); x++) img[y][x] = gen(x, y);
    for (int cy = 0; cy < NCY; cy++) for (int cx = 0; cx < NCX; cx++)
      for (int b = 0; b < int'(NBINS); b++) href[cy][cx][b] = 0;
    for (int y = 0; y < int'(H); y++)
      for (int x = 0; x < int'(W); x++) begin
        int gx, gy, a, b, m, s, lb;
        bit mirror;
        gx = int'(px(x + 1, y)) - int'(px(x - 1, y));
        gy = int'(px(x, y + 1)) - int'(px(x, y - 1));
        mirror = (gx < 0 && gy > 0) || (gx > 0 && gy < 0);
        if (gx < 0) gx = -gx;
        if (gy < 0) gy = -gy;
        a = gx > gy ? gx : gy; b = gx > gy ? gy : gx;
        m = (7 * a + 4 * b > 8 * a) ? 7 * a + 4 * b : 8 * a;   // eighths
        if (m > 2047) m = 2047;
        // tangent thresholds of 10, 30, 50, 70 degrees times 256
        s = int'(gy * 256 >= gx * 45) + int'(gy * 256 >= gx * 148) + int'(gy * 256 >= gx * 305)
          + int'(gy * 256 >= gx * 703);
        lb = (s == 0) ? 8 : (mirror ? 8 - s : s - 1);
        href[y / 8][x / 8][lb] += m;
        href[y / 8][x / 8][(lb + 1) % 9] += m;
      end
  endtask

  // ---- probes ----
  int hist_n = 0, feat_n = 0, score_n = 0;
  longint det_list [$];        // packed {x, y, score} of this frame's detections
  int draw_boxes [MAX_DRAW][4];
  int draw_count = 0, draw_next = 0;
  int out_n = 0;

  always @(posedge clk) if (!rst) begin
    if (!s_tready) n_flush++;
    if (p_backlog > 1) n_burst++;
    if (p_clip) n_clip++;
    if (p_drawn) n_drawn++;
    if (p_grad_valid)
      for (int k = 0; k < 4; k++) begin
        if (p_grad[k].bin == 4'd8) n_wrap++;
        if (p_grad[k].mag == 11'd2047) n_sat++;
      end
    if (p_hist_valid) begin
      int cx, cy;
      cx = hist_n % NCX; cy = hist_n / NCX;
      checks++;
      if (int'(p_hist_cx) != cx || int'(p_hist_cy) != cy) begin
        failures++;
        $display("FAIL histogram order: cell %0d,%0d, expected %0d,%0d", p_hist_cx, p_hist_cy, cx, cy);
      end
      for (int b = 0; b < int'(NBINS); b++) begin
        checks++;
        if (int'(p_hist[b]) != href[cy][cx][b]) begin
          failures++;
          if (failures < 20) $display("FAIL cell %0d,%0d bin %0d: %0d, expected %0d", cx, cy, b, p_hist[b], href[cy][cx][b]);
        end
      end
      hist_n++;
    end
    if (p_feat_valid) begin
      int bx, by;
      real s, n2, yq;
      int thq [36];
      real tol1 [36];
      bx = feat_n % NBX; by = feat_n / NBX;
      checks++;
      if (int'(p_feat_bx) != bx || int'(p_feat_by) != by) begin
        failures++;
        $display("FAIL block order: %0d,%0d, expected %0d,%0d", p_feat_bx, p_feat_by, bx, by);
      end
      s = 0.0;
      for (int c = 0; c < 4; c++)
        for (int k = 0; k < 9; k++) s += (real'(href[by + c / 2][bx + c % 2][k]) / 16.0) ** 2;
      if (s == 0.0) n_zero_blk++;
      // The first inverse root has 18 fractional bits only: for a high-contrast block it keeps
      // few significant bits, so the first-stage tolerance grows with 1/yq.
      yq = (s == 0.0) ? 0.0 : $floor(262144.0 / $sqrt(s));
      n2 = 0.0;
      for (int c = 0; c < 4; c++)
        for (int k = 0; k < 9; k++) begin
          real n1;
          n1 = (s == 0.0) ? 0.0 : $floor(real'(href[by + c / 2][bx + c % 2][k]) / 16.0 / $sqrt(s) * 512.0);
          thq[9*c+k] = (n1 > 102.0) ? 102 : int'(n1);
          tol1[9*c+k] = 1.0 + real'(thq[9*c+k]) * (0.0025 + ((yq > 0.0) ? 1.0 / yq : 0.0));
          n2 += real'(thq[9*c+k]) ** 2;
        end
      for (int i = 0; i < 36; i++) begin
        real e, tol;
        tol = (n2 == 0.0) ? 3.0 : 2.0 + 1.5 * tol1[i] * 512.0 / $sqrt(n2);
        e = (n2 == 0.0) ? 0.0 : $floor(real'(thq[i]) / $sqrt(n2) * 512.0);
        if (e > 1023.0) e = 1023.0;
        checks++;
        if (real'(p_feat[i]) > e + tol || real'(p_feat[i]) < e - tol) begin
          failures++;
          if (failures < 20) $display("FAIL block %0d,%0d feature %0d: %0d, expected %0f", bx, by, i, p_feat[i], e);
        end
        fhw[by][bx][i] = p_feat[i];
      end
      feat_n++;
    end
    if (score_valid) begin
      int wx, wy;
      longint e;
      wx = score_n % NWX; wy = score_n / NWX;
      e = BIAS;
      for (int y = 0; y < 15; y++)
        for (int x = 0; x < 7; x++)
          for (int i = 0; i < 36; i++)
            e += longint'(fhw[wy + y][wx + x][i]) * longint'(svm_default_coef(y, x, i));
      checks++;
      if (int'(win_x) != 8 * wx || int'(win_y) != 8 * wy || longint'(score) != e) begin
        failures++;
        if (failures < 20) $display("FAIL window %0d,%0d: (%0d,%0d) score %0d, expected %0d", wx, wy, win_x, win_y, score, e);
      end
      if (e > 0) begin
        n_det++;
        det_list.push_back((longint'(win_x) << 45) | (longint'(win_y) << 33) | (longint'(score) & 64'h1_FFFF_FFFF));
      end else n_nondet++;
      score_n++;
    end
    if (m_tvalid) begin
      int p, vx, y;
      p = out_n % (LINE * H); vx = p % LINE; y = p / LINE;
      checks++;
      if (m_tuser != (p == 0) || m_tlast != (vx == LINE - 1)) begin
        failures++;
        $display("FAIL output flags at vector %0d,%0d", vx, y);
      end
      for (int k = 0; k < 4; k++) begin
        int x;
        bit hit;
        pix_t e;
        x = 4 * vx + k;
        hit = 0;
        for (int i = 0; i < draw_count; i++)
          if (((x == draw_boxes[i][0] || x == draw_boxes[i][2]) && y >= draw_boxes[i][1] && y <= draw_boxes[i][3]) ||
              ((y == draw_boxes[i][1] || y == draw_boxes[i][3]) && x >= draw_boxes[i][0] && x <= draw_boxes[i][2]))
            hit = 1;
        e = hit ? 8'hFF : img[y][x];
        checks++;
        if (m_tdata[8*k +: 8] != e) begin
          failures++;
          if (failures < 20) $display("FAIL output pixel %0d,%0d: %0d, expected %0d", x, y, m_tdata[8*k +: 8], e);
        end
      end
      out_n++;
    end
  end

  int ready_low;
  task automatic send_frame();
    ready_low = 0;
    for (int y = 0; y < int'(H); y++)
      for (int v = 0; v < LINE; v++) begin
        s_tvalid <= 1;
        s_tuser  <= (y == 0 && v == 0);
        s_tlast  <= (v == LINE - 1);
        for (int k = 0; k < 4; k++) s_tdata[8*k +: 8] <= img[y][4*v+k];
        @(posedge clk);
        while (!s_tready) begin ready_low++; @(posedge clk); end
      end
    s_tvalid <= 0;
    // the flush follows the last vector
    @(posedge clk);
    while (!s_tready) begin ready_low++; @(posedge clk); end
    checks++;
    if (ready_low != LINE + 1) begin
      failures++;
      $display("FAIL input paused %0d cycles in frame %0d, expected %0d", ready_low, frame, LINE + 1);
    end
  endtask

  // processor model: read the list, compare, write the first detections as boxes
  task automatic processor();
    int n;
    n = int'(bb_frame_count);
    checks++;
    if (n != (det_list.size() > BBOX_DEPTH ? BBOX_DEPTH : det_list.size()) ||
        bb_overflow != (det_list.size() > BBOX_DEPTH)) begin
      failures++;
      $display("FAIL detection list holds %0d, %0d detections seen", n, det_list.size());
    end
    if (bb_overflow) n_overflow++;
    for (int i = 0; i < n; i++) begin
      bb_rd_en <= 1; bb_rd_addr <= ($clog2(BBOX_DEPTH))'(i);
      @(posedge clk);
      bb_rd_en <= 0;
      @(posedge clk);
      checks++;
      if (longint'(bb_rd_data) != det_list[i]) begin
        failures++;
        $display("FAIL detection entry %0d", i);
      end
    end
    draw_next = (n < MAX_DRAW) ? n : MAX_DRAW;
    for (int i = 0; i < int'(MAX_BOXES); i++) begin
      logic [2*COORD_W+SCORE_W-1:0] d;
      d = (i < draw_next) ? (2*COORD_W+SCORE_W)'(det_list[i]) : '0;
      box_we <= 1; box_idx <= ($clog2(MAX_BOXES))'(i); box_en <= (i < draw_next);
      box_x0 <= d[2*COORD_W+SCORE_W-1 -: COORD_W];
      box_y0 <= d[COORD_W+SCORE_W-1 -: COORD_W];
      box_x1 <= d[2*COORD_W+SCORE_W-1 -: COORD_W] + 12'd63;
      box_y1 <= d[COORD_W+SCORE_W-1 -: COORD_W] + 12'd127;
      if (i < MAX_DRAW) begin
        draw_boxes[i][0] = int'(d[2*COORD_W+SCORE_W-1 -: COORD_W]);
        draw_boxes[i][1] = int'(d[COORD_W+SCORE_W-1 -: COORD_W]);
        draw_boxes[i][2] = draw_boxes[i][0] + 63;
        draw_boxes[i][3] = draw_boxes[i][1] + 127;
      end
      @(posedge clk);
    end
    box_we <= 0;
  endtask

  initial begin
    checks = 0; failures = 0; done = 0;
    rst = 1; s_tvalid = 0; s_tuser = 0; s_tlast = 0; s_tdata = 0;
    bb_rd_en = 0; bb_rd_addr = 0; box_we = 0; box_idx = 0; box_en = 0;
    box_x0 = 0; box_y0 = 0; box_x1 = 0; box_y1 = 0;
    repeat (4) @(posedge clk);
    rst <= 0;
    for (frame = 0; frame < int'(FRAMES); frame++) begin
      build_frame();
      hist_n = 0; feat_n = 0; score_n = 0; out_n = 0;
      det_list.delete();
      @(posedge clk);
      draw_count = draw_next;     // boxes written after the previous frame apply now
      send_frame();
      wait (bb_done_irq);
      @(posedge clk);
      checks++;
      if (hist_n != NCX * NCY || feat_n != NBX * NBY || score_n != NWX * NWY || out_n != LINE * H) begin
        failures++;
        $display("FAIL frame %0d: %0d cells, %0d blocks, %0d windows, %0d output vectors", frame,
                 hist_n, feat_n, score_n, out_n);
      end
      processor();
      $display("frame %0d: %0d detections of %0d windows", frame, det_list.size(), score_n);
    end
    $display("mechanisms: flush %0d, queue burst %0d, clipping %0d, wrap-around bin %0d, magnitude saturation %0d, zero block %0d, detection %0d, rejection %0d, list overflow %0d, drawn %0d",
             n_flush, n_burst, n_clip, n_wrap, n_sat, n_zero_blk, n_det, n_nondet, n_overflow, n_drawn);
    checks++;
    if (n_flush == 0 || n_burst == 0 || n_clip == 0 || n_wrap == 0 || n_sat == 0 || n_zero_blk == 0 ||
        n_det == 0 || n_nondet == 0 || n_overflow == 0 || n_drawn == 0) begin
      failures++;
      $display("FAIL a mechanism never happened");
    end
    done = 1;
  end
endmodule
