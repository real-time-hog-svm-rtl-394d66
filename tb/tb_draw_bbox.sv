// tb_draw_bbox: three frames of random video (64x24 pixels) through the box overlay. Boxes are
// written into the table during a frame and must appear only from the next start of frame:
// frame 0 none, frame 1 two boxes (one reaching the right edge), frame 2 one box disabled again.
// Every output pixel is compared with the input or white according to the box outlines, and
// the start-of-frame and end-of-line flags must follow the data with one cycle of latency.
module tb_draw_bbox;
  import hog_pkg::*;
  localparam int W = 64, H = 24, LINE = W / 4;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic box_we, box_en, s_valid, s_sof, s_eol, m_valid, m_sof, m_eol, drawn;
  logic [3:0] box_idx;
  coord_t box_x0, box_y0, box_x1, box_y1;
  logic [31:0] s_data, m_data;

  draw_bbox #(.WIDTH(W), .MAX_BOXES(16)) dut (.clk, .rst, .box_we, .box_idx, .box_en, .box_x0,
    .box_y0, .box_x1, .box_y1, .s_valid, .s_data, .s_sof, .s_eol, .m_valid, .m_data, .m_sof,
    .m_eol, .drawn);

  typedef struct { bit en; int x0, y0, x1, y1; } rbox_t;
  rbox_t boxes [3][2];
  pix_t img [3][H][W];
  int out_n = 0, drawn_vecs = 0;

  function automatic bit on_box(int f, int x, int y);
    for (int i = 0; i < 2; i++) begin
      rbox_t b;
      b = boxes[f][i];
      if (b.en && (((x == b.x0 || x == b.x1) && y >= b.y0 && y <= b.y1) ||
                   ((y == b.y0 || y == b.y1) && x >= b.x0 && x <= b.x1))) return 1;
    end
    return 0;
  endfunction

  always @(posedge clk) begin
    if (!rst && m_valid) begin
      int f, p, vx, y;
      f = out_n / (LINE * H); p = out_n % (LINE * H);
      vx = p % LINE; y = p / LINE;
      checks++;
      if (m_sof != (p == 0) || m_eol != (vx == LINE - 1)) begin
        failures++;
        $display("FAIL flags at %0d,%0d", vx, y);
      end
      for (int k = 0; k < 4; k++) begin
        pix_t e;
        e = on_box(f, 4 * vx + k, y) ? 8'hFF : img[f][y][4*vx+k];
        checks++;
        if (m_data[8*k +: 8] != e) begin
          failures++;
          if (failures < 10) $display("FAIL f%0d pixel %0d,%0d got %0d exp %0d", f, 4*vx+k, y, m_data[8*k +: 8], e);
        end
      end
      if (drawn) drawn_vecs++;
      out_n++;
    end
  end

  task automatic write_box(int idx, rbox_t b);
    @(posedge clk);
    box_we <= 1; box_idx <= 4'(idx); box_en <= b.en;
    box_x0 <= coord_t'(b.x0); box_y0 <= coord_t'(b.y0); box_x1 <= coord_t'(b.x1); box_y1 <= coord_t'(b.y1);
    @(posedge clk) box_we <= 0;
  endtask

  initial begin
    box_we = 0; s_valid = 0; s_sof = 0; s_eol = 0;
    boxes[0][0] = '{0, 0, 0, 0, 0};       boxes[0][1] = '{0, 0, 0, 0, 0};
    boxes[1][0] = '{1, 5, 3, 20, 10};     boxes[1][1] = '{1, 40, 12, 63, 23};
    boxes[2][0] = '{0, 5, 3, 20, 10};     boxes[2][1] = '{1, 40, 12, 63, 23};
    for (int f = 0; f < 3; f++)
      for (int y = 0; y < H; y++)
        for (int x = 0; x < W; x++) img[f][y][x] = pix_t'($urandom_range(200, 0));
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int f = 0; f < 3; f++)
      for (int y = 0; y < H; y++)
        for (int v = 0; v < LINE; v++) begin
          @(posedge clk);
          s_valid <= 1; s_sof <= (y == 0 && v == 0); s_eol <= (v == LINE - 1);
          for (int k = 0; k < 4; k++) s_data[8*k +: 8] <= img[f][y][4*v+k];
          if (y == 5 && v == 3 && f < 2) begin   // update the table in mid-frame
            @(posedge clk) s_valid <= 0;
            write_box(0, boxes[f+1][0]);
            write_box(1, boxes[f+1][1]);
          end
        end
    @(posedge clk) s_valid <= 0;
    repeat (5) @(posedge clk);
    checks++;
    if (out_n != 3 * LINE * H || drawn_vecs == 0) begin
      failures++;
      $display("FAIL %0d vectors out, %0d with box pixels", out_n, drawn_vecs);
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
