// tb_context_gen: two random frames (with random gaps in the input) through the context
// generator at a small frame size. Every output context is compared with the 3x3 neighbourhood
// taken from the stored image, with edge replication at the borders. Also checked: one output
// per input vector in raster order, and the flush at the end of each frame (ready low for
// exactly LINE+1 cycles).
module tb_context_gen;
  import hog_pkg::*;
  localparam int W = 32, H = 6, LINE = W / 4;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic s_valid, s_ready, s_sof;
  logic [31:0] s_data;
  logic m_valid;
  ctx3_t [PPC-1:0] m_ctx;
  coord_t m_vx, m_y;

  context_gen #(.WIDTH(W), .HEIGHT(H)) dut (.clk, .rst, .s_valid, .s_ready, .s_data, .s_sof,
    .m_valid, .m_ctx, .m_vx, .m_y);

  pix_t img [2][H][W];
  int out_n = 0, flush_cycles = 0;

  function automatic pix_t px(int f, int x, int y);
    if (x < 0) x = 0;
    if (x > W - 1) x = W - 1;
    if (y < 0) y = 0;
    if (y > H - 1) y = H - 1;
    return img[f][y][x];
  endfunction

  always @(posedge clk) begin
    if (!rst && !s_ready) flush_cycles++;
    if (!rst && m_valid) begin
      int f, p, vx, y;
      f = out_n / (LINE * H);
      p = out_n % (LINE * H);
      vx = p % LINE; y = p / LINE;
      checks++;
      if (int'(m_vx) != vx || int'(m_y) != y) begin
        failures++;
        $display("FAIL position %0d,%0d expected %0d,%0d", m_vx, m_y, vx, y);
      end
      for (int k = 0; k < 4; k++)
        for (int r = 0; r < 3; r++)
          for (int c = 0; c < 3; c++) begin
            checks++;
            if (m_ctx[k][r][c] != px(f, 4 * vx + k + c - 1, y + r - 1)) begin
              failures++;
              if (failures < 10)
                $display("FAIL f%0d vx%0d y%0d k%0d r%0d c%0d got %0d exp %0d", f, vx, y, k, r, c,
                         m_ctx[k][r][c], px(f, 4 * vx + k + c - 1, y + r - 1));
            end
          end
      out_n++;
    end
  end

  initial begin
    s_valid = 0; s_sof = 0; s_data = 0;
    for (int f = 0; f < 2; f++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) img[f][y][x] = pix_t'($urandom);
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int f = 0; f < 2; f++)
      for (int y = 0; y < H; y++)
        for (int v = 0; v < LINE; v++) begin
          @(posedge clk);
          while ($urandom_range(3, 0) == 0) begin s_valid <= 0; @(posedge clk); end
          s_valid <= 1;
          s_sof   <= (y == 0 && v == 0);
          for (int k = 0; k < 4; k++) s_data[8*k +: 8] <= img[f][y][4*v+k];
          // hold until taken
          do @(posedge clk); while (!s_ready);
          s_valid <= 0;
        end
    repeat (3 * LINE) @(posedge clk);
    checks++;
    if (out_n != 2 * LINE * H || flush_cycles != 2 * (LINE + 1)) begin
      failures++;
      $display("FAIL outputs %0d (exp %0d), flush cycles %0d (exp %0d)", out_n, 2 * LINE * H,
               flush_cycles, 2 * (LINE + 1));
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
