// tb_gradient_unit: random 3x3 contexts and hand-picked directions through the gradient unit.
// The magnitude is checked against max(0.875a + 0.5b, a) in eighths (saturated to 11 bits) and
// against the exact root (within 12 %); the bin against the interval of the real atan2 angle
// between bin centres 10, 30, ..., 170 degrees (angles within 0.6 degrees of an interval edge
// may fall either way because the tangents are rounded). Latency must be 2 cycles.
module tb_gradient_unit;
  import hog_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic            in_valid;
  ctx3_t [PPC-1:0] in_ctx;
  coord_t          in_vx, in_y;
  logic            out_valid;
  grad_t [PPC-1:0] out_grad;
  coord_t          out_vx, out_y;

  gradient_unit dut (.clk, .rst, .in_valid, .in_ctx, .in_vx, .in_y, .out_valid, .out_grad, .out_vx, .out_y);

  localparam int N = 4000;
  ctx3_t [PPC-1:0] ctxs [N];
  int sent_cyc [N];
  int cyc = 0, got = 0;
  int wrap_bins = 0;
  always @(posedge clk) cyc = cyc + 1;

  function automatic void check_pixel(ctx3_t c, grad_t g);
    int gx, gy, a, b, m;
    real ang, pos, frac, PI;
    int lb;
    PI = 3.14159265358979;
    gx = int'(c[1][2]) - int'(c[1][0]);
    gy = int'(c[2][1]) - int'(c[0][1]);
    a = (gx < 0 ? -gx : gx); b = (gy < 0 ? -gy : gy);
    if (b > a) begin int t; t = a; a = b; b = t; end
    m = (7 * a + 4 * b > 8 * a) ? 7 * a + 4 * b : 8 * a;
    if (m > 2047) m = 2047;
    checks++;
    if (int'(g.mag) != m) begin
      failures++;
      if (failures < 10) $display("FAIL mag gx=%0d gy=%0d got %0d exp %0d", gx, gy, g.mag, m);
    end
    if (m < 2047 && a > 0) begin
      real ex;
      ex = $sqrt(real'(gx * gx + gy * gy)) * 8.0;
      checks++;
      if (real'(g.mag) > ex * 1.12 || real'(g.mag) < ex * 0.88) begin
        failures++;
        $display("FAIL mag approximation too coarse %0d vs %0f", g.mag, ex);
      end
    end
    if (gx == 0 && gy == 0) return;
    ang = $atan2(real'(gy), real'(gx)) * 180.0 / PI;
    if (ang < 0.0) ang = ang + 180.0;
    if (ang >= 180.0) ang = ang - 180.0;
    pos = (ang - 10.0) / 20.0;
    if (pos < 0.0) pos = pos + 9.0;
    lb = int'($floor(pos));
    frac = (pos - $floor(pos)) * 20.0;
    if (lb == 8) wrap_bins++;
    checks++;
    if (int'(g.bin) != lb && !(frac < 0.6 && int'(g.bin) == (lb + 8) % 9)
                          && !(frac > 19.4 && int'(g.bin) == (lb + 1) % 9)) begin
      failures++;
      if (failures < 10) $display("FAIL bin gx=%0d gy=%0d angle %0f got %0d exp %0d", gx, gy, ang, g.bin, lb);
    end
  endfunction

  // input monitor: what the unit sampled, and when
  int sent = 0;
  always @(posedge clk) begin
    if (!rst && in_valid) begin
      sent_cyc[sent] = cyc;
      sent++;
    end
    if (out_valid && !rst) begin
      for (int k = 0; k < int'(PPC); k++) check_pixel(ctxs[got][k], out_grad[k]);
      checks++;
      if (cyc - sent_cyc[got] != 2 || out_vx != coord_t'(got) || out_y != coord_t'(got + 1)) begin
        failures++;
        $display("FAIL latency/coordinates");
      end
      got++;
    end
  end

  initial begin
    for (int i = 0; i < N; i++)
      for (int k = 0; k < int'(PPC); k++)
        for (int r = 0; r < 3; r++)
          for (int cc = 0; cc < 3; cc++)
            ctxs[i][k][r][cc] = pix_t'($urandom);
    // a few exact directions: pure horizontal, vertical, diagonals, maximum contrast
    ctxs[0][0] = '0; ctxs[0][0][1][2] = 8'd255;                           // gx=255, gy=0
    ctxs[0][1] = '0; ctxs[0][1][2][1] = 8'd100;                           // gx=0, gy=100
    ctxs[0][2] = '0; ctxs[0][2][1][2] = 8'd50; ctxs[0][2][2][1] = 8'd50;  // 45 degrees
    ctxs[0][3] = '0; ctxs[0][3][1][0] = 8'd50; ctxs[0][3][2][1] = 8'd50;  // 135 degrees
    ctxs[1][0] = '0; ctxs[1][0][1][2] = 8'd255; ctxs[1][0][2][1] = 8'd255; // saturating magnitude
    in_valid = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int i = 0; i < N; i++) begin
      @(posedge clk);
      in_valid <= 1; in_ctx <= ctxs[i]; in_vx <= coord_t'(i); in_y <= coord_t'(i + 1);
      if (i % 7 == 3) begin @(posedge clk); in_valid <= 0; end   // gaps in the stream
    end
    @(posedge clk) in_valid <= 0;
    repeat (5) @(posedge clk);
    checks++;
    if (got != N || wrap_bins == 0) begin
      failures++;
      $display("FAIL got %0d of %0d, wrap-around bins %0d", got, N, wrap_bins);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
