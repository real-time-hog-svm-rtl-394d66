// tb_svm_classifier: two frames of random block features (11x17 blocks, i.e. a 96x144-pixel
// frame with 5x3 window positions) sent as cells, four cycles per block, with gaps. The
// reference computes every window score directly, bias + sum over the 7x15 blocks and 36
// features of feature * coefficient; the classifier must give exactly these scores, in raster
// order with the right window positions, flag the positive ones as detections, and mark the
// first and last block of each frame.
module tb_svm_classifier;
  import hog_pkg::*;
  localparam int W = 96, H = 144, NBX = W / 8 - 1, NBY = H / 8 - 1;
  localparam int NWX = NBX - 6, NWY = NBY - 14;
  localparam logic signed [SCORE_W-1:0] BIAS = 33'sd1000000;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic       in_valid, score_valid, det_valid, frame_start, frame_done;
  logic [1:0] in_cell;
  cell_feat_t in_feat;
  coord_t     in_bx, in_by, win_x, win_y;
  score_t     score;

  svm_classifier #(.WIDTH(W), .HEIGHT(H), .BIAS(BIAS)) dut (.clk, .rst, .in_valid, .in_cell,
    .in_feat, .in_bx, .in_by, .score_valid, .score, .win_x, .win_y, .det_valid,
    .frame_start, .frame_done);

  feat_t feat [2][NBY][NBX][36];
  int got = 0, dets = 0, nondets = 0, starts = 0, dones = 0;

  function automatic longint ref_score(int f, int wx, int wy);
    longint s;
    s = longint'(BIAS);
    for (int y = 0; y < 15; y++)
      for (int x = 0; x < 7; x++)
        for (int i = 0; i < 36; i++)
          s += longint'(feat[f][wy + y][wx + x][i]) * longint'(svm_default_coef(y, x, i));
    return s;
  endfunction

  always @(posedge clk) begin
    if (!rst && frame_start) starts++;
    if (!rst && frame_done) dones++;
    if (!rst && score_valid) begin
      int f, w, wx, wy;
      longint e;
      f = got / (NWX * NWY); w = got % (NWX * NWY);
      wx = w % NWX; wy = w / NWX;
      e = ref_score(f, wx, wy);
      checks++;
      if (int'(win_x) != 8 * wx || int'(win_y) != 8 * wy || longint'(score) != e) begin
        failures++;
        $display("FAIL window %0d,%0d: got (%0d,%0d) score %0d, expected %0d", wx, wy, win_x, win_y, score, e);
      end
      checks++;
      if (det_valid != (e > 0)) begin
        failures++;
        $display("FAIL detection flag for window %0d,%0d", wx, wy);
      end
      if (e > 0) dets++; else nondets++;
      got++;
    end
  end

  initial begin
    in_valid = 0;
    for (int f = 0; f < 2; f++)
      for (int by = 0; by < NBY; by++)
        for (int bx = 0; bx < NBX; bx++)
          for (int i = 0; i < 36; i++) feat[f][by][bx][i] = feat_t'($urandom_range(200, 0));
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int f = 0; f < 2; f++)
      for (int by = 0; by < NBY; by++)
        for (int bx = 0; bx < NBX; bx++) begin
          for (int c = 0; c < 4; c++) begin
            @(posedge clk);
            in_valid <= 1; in_cell <= 2'(c); in_bx <= coord_t'(bx); in_by <= coord_t'(by);
            for (int i = 0; i < 9; i++) in_feat[i] <= feat[f][by][bx][9*c+i];
          end
          if ($urandom_range(3, 0) == 0) begin
            @(posedge clk) in_valid <= 0;
            repeat ($urandom_range(5, 0)) @(posedge clk);
          end
        end
    @(posedge clk) in_valid <= 0;
    repeat (10) @(posedge clk);
    checks++;
    if (got != 2 * NWX * NWY || starts != 2 || dones != 2 || dets == 0 || nondets == 0) begin
      failures++;
      $display("FAIL %0d scores (exp %0d), %0d starts, %0d dones, %0d detections, %0d others",
               got, 2 * NWX * NWY, starts, dones, dets, nondets);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
