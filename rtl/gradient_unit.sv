// gradient_unit: gradient magnitude and orientation interval of the PPC pixels of a vector.
//
// For every pixel, Gx and Gy come from the [-1 0 1] mask and its transpose over the 3x3 context.
// The magnitude uses the square-root approximation m = max(0.875a + 0.5b, a) with a = max(|Gx|,|Gy|)
// and b = min(|Gx|,|Gy|), computed in eighths (7a+4b against 8a) and saturated to the 11-bit,
// 3-fraction-bit format. The orientation is not computed: the unsigned angle (0..180 degrees) is
// only placed between two adjacent bin centres (10, 30, ..., 170 degrees) by comparing |Gy|*256
// with |Gx|*T for the tangents of 10, 30, 50 and 70 degrees, in the first quadrant only; the
// second quadrant is mirrored by the sign of Gx*Gy. The output bin is the lower of the two
// adjacent bins, the upper one is (bin+1) mod 9. The tangent constants of the source are not
// published; here they are round(256*tan): 45, 148, 305, 703.
//
// Timing: two register stages, one result vector per input vector, no stalls.
module gradient_unit
  import hog_pkg::*;
(
  input  logic            clk,
  input  logic            rst,
  input  logic            in_valid,
  input  ctx3_t [PPC-1:0] in_ctx,
  input  coord_t          in_vx,
  input  coord_t          in_y,
  output logic            out_valid,
  output grad_t [PPC-1:0] out_grad,
  output coord_t          out_vx,
  output coord_t          out_y
);
  localparam logic [9:0] TAN10 = 10'd45;
  localparam logic [9:0] TAN30 = 10'd148;
  localparam logic [9:0] TAN50 = 10'd305;
  localparam logic [9:0] TAN70 = 10'd703;

  // Stage 1: gradient components.
  logic                   s1_valid;
  logic [PPC-1:0][7:0]    s1_ax, s1_ay;   // |Gx|, |Gy| (saturated to 255)
  logic [PPC-1:0]         s1_mirror;      // angle lies in the second quadrant
  coord_t                 s1_vx, s1_y;

  always_ff @(posedge clk) begin
    if (rst) s1_valid <= 1'b0;
    else     s1_valid <= in_valid;
    if (in_valid) begin
      s1_vx <= in_vx;
      s1_y  <= in_y;
      for (int k = 0; k < int'(PPC); k++) begin
        logic signed [9:0] gx, gy;
        gx = $signed({2'b00, in_ctx[k][1][2]}) - $signed({2'b00, in_ctx[k][1][0]});
        gy = $signed({2'b00, in_ctx[k][2][1]}) - $signed({2'b00, in_ctx[k][0][1]});
        s1_ax[k]     <= (gx < 0) ? 8'(-gx) : 8'(gx);
        s1_ay[k]     <= (gy < 0) ? 8'(-gy) : 8'(gy);
        s1_mirror[k] <= ((gx < 0) && (gy > 0)) || ((gx > 0) && (gy < 0));
      end
    end
  end

  // Stage 2: magnitude and bin.
  always_ff @(posedge clk) begin
    if (rst) out_valid <= 1'b0;
    else     out_valid <= s1_valid;
    if (s1_valid) begin
      out_vx <= s1_vx;
      out_y  <= s1_y;
      for (int k = 0; k < int'(PPC); k++) begin
        logic [7:0]  a, b;
        logic [11:0] m7, m8, m;
        logic [17:0] gy256;
        logic [2:0]  sector;
        a  = (s1_ax[k] > s1_ay[k]) ? s1_ax[k] : s1_ay[k];
        b  = (s1_ax[k] > s1_ay[k]) ? s1_ay[k] : s1_ax[k];
        m7 = 12'(7 * a) + 12'(4 * b);
        m8 = 12'(8 * a);
        m  = (m7 > m8) ? m7 : m8;
        out_grad[k].mag <= (m > 12'd2047) ? 11'd2047 : m[10:0];
        gy256  = {s1_ay[k], 10'b0} >> 2;
        sector = 3'(gy256 >= 18'(s1_ax[k] * TAN10)) + 3'(gy256 >= 18'(s1_ax[k] * TAN30))
               + 3'(gy256 >= 18'(s1_ax[k] * TAN50)) + 3'(gy256 >= 18'(s1_ax[k] * TAN70));
        // sector 0: 0..10 deg, 1: 10..30, 2: 30..50, 3: 50..70, 4: 70..90
        if (sector == 3'd0)       out_grad[k].bin <= 4'd8;            // between 170 and 10
        else if (!s1_mirror[k])   out_grad[k].bin <= 4'(sector - 1);  // 10..90 deg
        else                      out_grad[k].bin <= 4'(8 - sector);  // 90..170 deg
      end
    end
  end
endmodule
