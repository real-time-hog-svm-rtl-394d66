// tb_block_norm: two frames of random cell histograms (6x4 cells, with one all-zero region and
// one cell far stronger than its neighbours so that clipping happens) through the block
// normalisation, one cell every two cycles as the histogram unit delivers them.
// The reference forms the 2x2 blocks from the stored cells, normalises with an exact square
// root, truncates to 9 fractional bits, clips at 102/512, normalises again and truncates; every
// feature must be within 2 LSB of it, plus 1.5 times the first-stage error bound (1 LSB, 0.25 %
// and the step of the 18-fraction-bit first root) scaled by the second normalisation. Also checked: block coordinates and order, zero blocks
// give zero features, the output norm is 1 within 2 %, clipping was seen, and the latency from
// a block's last cell to its feature vector is the same for every block.
module tb_block_norm;
  import hog_pkg::*;
  localparam int W = 48, NCX = W / 8, NCY = 4, NBX = NCX - 1, NBY = NCY - 1;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        in_valid;
  cell_hist_t  in_hist;
  coord_t      in_cx, in_cy;
  logic        out_valid, clip_seen;
  block_feat_t out_feat;
  coord_t      out_bx, out_by;

  block_norm #(.WIDTH(W)) dut (.clk, .rst, .in_valid, .in_hist, .in_cx, .in_cy,
    .out_valid, .out_feat, .out_bx, .out_by, .clip_seen);

  int hist [2][NCY][NCX][NBINS];
  int out_n = 0, clips = 0, zero_blocks = 0;
  int cyc = 0, lat0 = -1;
  int blk_cyc [$];
  always @(posedge clk) begin
    cyc = cyc + 1;
    if (!rst && in_valid && in_cx != 0 && in_cy != 0) blk_cyc.push_back(cyc);
    if (!rst && clip_seen) clips++;
  end

  always @(posedge clk) begin
    if (!rst && out_valid) begin
      int f, b, bx, by;
      real s, n1, n2, ss, yq;
      int  thq [36];
      real tol1 [36];
      f = out_n / (NBX * NBY); b = out_n % (NBX * NBY);
      bx = b % NBX; by = b / NBX;
      checks++;
      if (int'(out_bx) != bx || int'(out_by) != by) begin
        failures++;
        $display("FAIL block %0d,%0d expected %0d,%0d", out_bx, out_by, bx, by);
      end
      checks++;
      if (lat0 < 0) lat0 = cyc - blk_cyc[0];
      else if (cyc - blk_cyc[0] != lat0) begin
        failures++;
        $display("FAIL latency %0d, first block had %0d", cyc - blk_cyc[0], lat0);
      end
      void'(blk_cyc.pop_front());
      // reference
      s = 0.0;
      for (int c = 0; c < 4; c++)
        for (int k = 0; k < 9; k++) begin
          int v;
          v = hist[f][by + c / 2][bx + c % 2][k];
          s += (real'(v) / 16.0) ** 2;
        end
      yq = (s == 0.0) ? 0.0 : $floor(262144.0 / $sqrt(s));   // first root, 18 fraction bits
      n2 = 0.0;
      for (int c = 0; c < 4; c++)
        for (int k = 0; k < 9; k++) begin
          real v;
          v = real'(hist[f][by + c / 2][bx + c % 2][k]) / 16.0;
          n1 = (s == 0.0) ? 0.0 : $floor(v / $sqrt(s) * 512.0);
          thq[9*c+k] = (n1 > 102.0) ? 102 : int'(n1);
          tol1[9*c+k] = 1.0 + real'(thq[9*c+k]) * (0.0025 + ((yq > 0.0) ? 1.0 / yq : 0.0));
          n2 += real'(thq[9*c+k]) ** 2;
        end
      if (s == 0.0) zero_blocks++;
      ss = 0.0;
      for (int i = 0; i < 36; i++) begin
        real e, tol;
        // a 1-LSB difference after the first stage is scaled by 512/sqrt(n2) in the second
        tol = (n2 == 0.0) ? 3.0 : 2.0 + 1.5 * tol1[i] * 512.0 / $sqrt(n2);
        e = (n2 == 0.0) ? 0.0 : $floor(real'(thq[i]) / $sqrt(n2) * 512.0);
        if (e > 1023.0) e = 1023.0;
        checks++;
        if (real'(out_feat[i]) > e + tol || real'(out_feat[i]) < e - tol) begin
          failures++;
          if (failures < 10) $display("FAIL block %0d,%0d feature %0d got %0d exp %0f", bx, by, i, out_feat[i], e);
        end
        ss += (real'(out_feat[i]) / 512.0) ** 2;
      end
      checks++;
      if (s != 0.0 && (ss < 0.98 || ss > 1.02)) begin
        failures++;
        $display("FAIL block %0d,%0d squared norm %0f", bx, by, ss);
      end
      out_n++;
    end
  end

  initial begin
    in_valid = 0;
    for (int f = 0; f < 2; f++)
      for (int cy = 0; cy < NCY; cy++)
        for (int cx = 0; cx < NCX; cx++)
          for (int k = 0; k < 9; k++) begin
            hist[f][cy][cx][k] = $urandom_range(3000, 0) >> $urandom_range(4, 0);
            if (cx < 2 && cy < 2) hist[f][cy][cx][k] = 0;                      // flat area
            if (cx == 4 && cy == 2) hist[f][cy][cx][k] = (k == 3) ? 200000 : 5;  // one strong edge
          end
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int f = 0; f < 2; f++)
      for (int cy = 0; cy < NCY; cy++)
        for (int cx = 0; cx < NCX; cx++) begin
          @(posedge clk);
          in_valid <= 1; in_cx <= coord_t'(cx); in_cy <= coord_t'(cy);
          for (int k = 0; k < 9; k++) in_hist[k] <= hist_t'(hist[f][cy][cx][k]);
          @(posedge clk) in_valid <= 0;
          if (cx == NCX - 1) repeat (20) @(posedge clk);   // rest of the cell row
        end
    repeat (40) @(posedge clk);
    checks++;
    if (out_n != 2 * NBX * NBY || clips == 0 || zero_blocks == 0) begin
      failures++;
      $display("FAIL %0d blocks (exp %0d), %0d clip events, %0d zero blocks", out_n, 2 * NBX * NBY, clips, zero_blocks);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
