// fast_invsqrt: pipelined approximate 1/sqrt(x) for unsigned fixed-point x.
//
// The input (IN_W bits, IN_FRAC fractional) is converted to an IEEE-754 single-precision bit
// pattern (leading-one search, exponent, 23-bit truncated mantissa). The first guess is the
// well-known bit trick y0 = 0x5F3759DF - (bits >> 1); one Newton-Raphson step then gives
// y1 = y0 * (3 - x*y0^2) / 2 (relative error below 0.2 %). The step is done on the integer
// mantissas with exact products; only the result is rounded down to OUT_W bits with OUT_FRAC
// fractional bits, saturating. x = 0 gives 0 (the vector to be scaled is all zero then).
//
// Timing: fully pipelined, one input per cycle, out_valid exactly LAT = 5 cycles after in_valid.
module fast_invsqrt #(
  parameter int unsigned IN_W     = 42,
  parameter int unsigned IN_FRAC  = 8,
  parameter int unsigned OUT_W    = 24,
  parameter int unsigned OUT_FRAC = 18
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              in_valid,
  input  logic [IN_W-1:0]   in_x,
  output logic              out_valid,
  output logic [OUT_W-1:0]  out_y
);
  localparam logic [31:0] MAGIC = 32'h5F3759DF;

  logic [4:0]        v;   // valid pipeline

  // Stage 1: float conversion and magic-number guess.
  logic [23:0] s1_mx;     // x mantissa with hidden one
  logic [23:0] s1_my;     // y0 mantissa with hidden one
  int          s1_ex;     // x = mx/2^23 * 2^s1_ex
  int          s1_ey;     // biased exponent of y0
  logic        s1_zero;

  always_ff @(posedge clk) begin
    if (in_valid) begin
      int          e;
      logic [63:0] xn;
      logic [31:0] fbits, ibits;
      e = 0;
      for (int i = 0; i < int'(IN_W); i++) if (in_x[i]) e = i;
      xn     = 64'(in_x) << (63 - e);
      fbits  = {1'b0, 8'(e - int'(IN_FRAC) + 127), xn[62:40]};
      ibits  = MAGIC - (fbits >> 1);
      s1_mx  <= xn[63:40];
      s1_my  <= {1'b1, ibits[22:0]};
      s1_ex  <= e - int'(IN_FRAC);
      s1_ey  <= int'(ibits[30:23]);
      s1_zero <= (in_x == '0);
    end
  end

  // Stage 2: y0^2.
  logic [47:0] s2_yy;
  logic [23:0] s2_mx, s2_my;
  int          s2_k, s2_ey;
  logic        s2_zero;
  always_ff @(posedge clk) begin
    s2_yy   <= 48'(s1_my) * 48'(s1_my);
    s2_mx   <= s1_mx;
    s2_my   <= s1_my;
    s2_k    <= s1_ex + 2 * (s1_ey - 127);   // t = mx*my^2 / 2^69 * 2^k
    s2_ey   <= s1_ey;
    s2_zero <= s1_zero;
  end

  // Stage 3: t = x * y0^2 as a 72-bit product.
  logic [71:0] s3_p;
  logic [23:0] s3_my;
  int          s3_k, s3_ey;
  logic        s3_zero;
  always_ff @(posedge clk) begin
    s3_p    <= 72'(s2_yy) * 72'(s2_mx);
    s3_my   <= s2_my;
    s3_k    <= s2_k;
    s3_ey   <= s2_ey;
    s3_zero <= s2_zero;
  end

  // Stage 4: Q = y0 * (3 - t), t in 30 fractional bits.
  logic [63:0] s4_q;
  int          s4_ey;
  logic        s4_zero;
  always_ff @(posedge clk) begin
    int          sh;
    logic [71:0] t;
    logic [31:0] r;
    sh = 39 - s3_k;
    if (sh >= 72)    t = '0;
    else if (sh < 0) t = '1;
    else             t = s3_p >> sh;
    r = (t >= 72'(32'hC000_0000)) ? 32'd0 : 32'hC000_0000 - t[31:0];
    s4_q    <= 64'(s3_my) * 64'(r);
    s4_ey   <= s3_ey;
    s4_zero <= s3_zero;
  end

  // Stage 5: scale to the output format, y = Q * 2^(ey - 181 + OUT_FRAC).
  always_ff @(posedge clk) begin
    int          sh;
    logic [63:0] y;
    logic        ovf;
    sh  = 181 - int'(OUT_FRAC) - s4_ey;
    ovf = 1'b0;
    if (sh >= 64) y = '0;
    else if (sh >= 0) y = s4_q >> sh;
    else begin
      y   = '1;
      ovf = 1'b1;
    end
    if (s4_zero)                        out_y <= '0;
    else if (ovf || (y >> OUT_W) != 0)  out_y <= '1;
    else                                out_y <= y[OUT_W-1:0];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      v         <= '0;
      out_valid <= 1'b0;
    end else begin
      v         <= {v[3:0], in_valid};
      out_valid <= v[3];
    end
  end
endmodule
