// tb_cell_histogram: random magnitudes and bins (including vectors whose four pixels all hit the
// same bin, and the 8 -> 0 wrap-around) for two frames of 32x16 pixels, streamed with gaps.
// A reference adds m/2 (= m in the histogram's 4-fraction-bit format) to bins b and (b+1) mod 9
// of the pixel's cell; each finished cell must come out once, in raster order of cells, with
// exactly these nine values, one cycle after the sum tree of its last vector.
module tb_cell_histogram;
  import hog_pkg::*;
  localparam int W = 32, H = 16, NCX = W / 8, NCY = H / 8, LINE = W / 4;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic            in_valid;
  grad_t [PPC-1:0] in_grad;
  coord_t          in_vx, in_y;
  logic            out_valid;
  cell_hist_t      out_hist;
  coord_t          out_cx, out_cy;

  cell_histogram #(.WIDTH(W)) dut (.clk, .rst, .in_valid, .in_grad, .in_vx, .in_y,
    .out_valid, .out_hist, .out_cx, .out_cy);

  grad_t g [2][H][W];
  int ref_h [2][NCY][NCX][NBINS];
  int out_n = 0, same_bin_vectors = 0;
  int cyc = 0;
  int last_vec_cyc [$];   // cycles at which the last vector of a cell was taken
  always @(posedge clk) begin
    cyc = cyc + 1;
    if (!rst && in_valid && in_vx % 2 == 1 && in_y % 8 == 7) last_vec_cyc.push_back(cyc);
  end

  always @(posedge clk) begin
    if (!rst && out_valid) begin
      int f, c, cx, cy;
      f = out_n / (NCX * NCY); c = out_n % (NCX * NCY);
      cx = c % NCX; cy = c / NCX;
      checks++;
      if (int'(out_cx) != cx || int'(out_cy) != cy || last_vec_cyc.size() == 0 ||
          cyc - last_vec_cyc[0] != 2) begin
        failures++;
        $display("FAIL cell %0d,%0d expected %0d,%0d", out_cx, out_cy, cx, cy);
      end
      if (last_vec_cyc.size() != 0) void'(last_vec_cyc.pop_front());
      for (int b = 0; b < int'(NBINS); b++) begin
        checks++;
        if (int'(out_hist[b]) != ref_h[f][cy][cx][b]) begin
          failures++;
          if (failures < 10) $display("FAIL f%0d cell %0d,%0d bin %0d got %0d exp %0d", f, cx, cy, b, out_hist[b], ref_h[f][cy][cx][b]);
        end
      end
      out_n++;
    end
  end

  initial begin
    in_valid = 0;
    for (int f = 0; f < 2; f++) begin
      for (int cy = 0; cy < NCY; cy++) for (int cx = 0; cx < NCX; cx++)
        for (int b = 0; b < int'(NBINS); b++) ref_h[f][cy][cx][b] = 0;
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) begin
          g[f][y][x].mag = mag_t'($urandom);
          g[f][y][x].bin = bin_t'($urandom_range(8, 0));
          if ((x / 4) % 3 == 1) g[f][y][x].bin = bin_t'(y % 9);   // whole vector on one bin
          ref_h[f][y/8][x/8][g[f][y][x].bin] += int'(g[f][y][x].mag);
          ref_h[f][y/8][x/8][(g[f][y][x].bin + 1) % 9] += int'(g[f][y][x].mag);
        end
    end
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int f = 0; f < 2; f++)
      for (int y = 0; y < H; y++)
        for (int v = 0; v < LINE; v++) begin
          @(posedge clk);
          if ($urandom_range(2, 0) == 0) begin in_valid <= 0; @(posedge clk); end
          in_valid <= 1; in_vx <= coord_t'(v); in_y <= coord_t'(y);
          for (int k = 0; k < 4; k++) in_grad[k] <= g[f][y][4*v+k];
          if (v % 3 == 1) same_bin_vectors++;
        end
    @(posedge clk) in_valid <= 0;
    repeat (10) @(posedge clk);
    checks++;
    if (out_n != 2 * NCX * NCY || same_bin_vectors == 0) begin
      failures++;
      $display("FAIL %0d cells out, expected %0d", out_n, 2 * NCX * NCY);
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
