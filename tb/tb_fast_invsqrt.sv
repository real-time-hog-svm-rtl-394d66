// tb_fast_invsqrt: checks the pipelined fast inverse square root in both formats used by the
// block normalisation (42/8 -> 24/18 and 26/18 -> 22/16) against a real-number 1/sqrt(x),
// with a tolerance of 0.25 % plus one LSB (one Newton step reaches about 0.18 %), saturation to
// the largest code, x = 0 giving 0, and the fixed latency of 5 cycles with back-to-back inputs.
module tb_fast_invsqrt;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        v1, v2;
  logic [41:0] x1;
  logic [25:0] x2;
  logic        ov1, ov2;
  logic [23:0] y1;
  logic [21:0] y2;

  fast_invsqrt #(.IN_W(42), .IN_FRAC(8),  .OUT_W(24), .OUT_FRAC(18)) dut1 (
    .clk, .rst, .in_valid(v1), .in_x(x1), .out_valid(ov1), .out_y(y1));
  fast_invsqrt #(.IN_W(26), .IN_FRAC(18), .OUT_W(22), .OUT_FRAC(16)) dut2 (
    .clk, .rst, .in_valid(v2), .in_x(x2), .out_valid(ov2), .out_y(y2));

  localparam int N = 3000;
  logic [41:0] xs1 [N];
  logic [25:0] xs2 [N];
  int issue_cyc [N];
  int cyc = 0;
  int got1 = 0, got2 = 0;
  always @(posedge clk) cyc <= cyc + 1;

  function automatic real expect_y(real x, int frac, int w);
    real e;
    if (x == 0.0) return 0.0;
    e = (2.0 ** frac) / $sqrt(x);
    if (e > (2.0 ** w) - 1.0) e = (2.0 ** w) - 1.0;
    return e;
  endfunction

  task automatic check(real got, real exp_v, string what);
    real tol;
    checks++;
    tol = exp_v * 0.0025 + 1.0;
    if (got > exp_v + tol || got < exp_v - tol) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0f expected %0f", what, got, exp_v);
    end
  endtask

  always @(posedge clk) begin
    if (ov1 && !rst) begin
      real e;
      e = expect_y(real'(xs1[got1]) / 256.0, 18, 24);
      check(real'(y1), e, "isq1");
      checks++;
      if (cyc - issue_cyc[got1] != 5) begin
        failures++;
        $display("FAIL latency %0d", cyc - issue_cyc[got1]);
      end
      got1++;
    end
    if (ov2 && !rst) begin
      real e;
      e = expect_y(real'(xs2[got2]) / 262144.0, 16, 22);
      check(real'(y2), e, "isq2");
      got2++;
    end
  end

  initial begin
    for (int i = 0; i < N; i++) begin
      int sh;
      sh = $urandom_range(41, 0);
      xs1[i] = (42'($urandom) << 10 | 42'($urandom)) >> (41 - sh);
      xs2[i] = 26'($urandom) >> $urandom_range(25, 0);
    end
    xs1[0] = 0;  xs1[1] = 256;  xs1[2] = 1;  xs1[3] = '1;   // 0, 1.0, smallest, largest
    xs2[0] = 0;  xs2[1] = 262144; xs2[2] = 1; xs2[3] = 26'd377856; // 0, 1.0, saturating, 1.44
    v1 = 0; v2 = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int i = 0; i < N; i++) begin
      @(posedge clk);
      v1 <= 1; v2 <= 1; x1 <= xs1[i]; x2 <= xs2[i];
      issue_cyc[i] = cyc + 1;
    end
    @(posedge clk);
    v1 <= 0; v2 <= 0;
    repeat (10) @(posedge clk);
    checks++;
    if (got1 != N || got2 != N) begin
      failures++;
      $display("FAIL outputs %0d %0d of %0d", got1, got2, N);
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
