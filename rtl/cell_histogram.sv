// cell_histogram: 9-bin orientation histograms of 8x8-pixel cells from a 4-pixel-per-clock stream.
//
// Each pixel gives half of its magnitude (m >> 1) to each of its two adjacent bins, bin and
// (bin+1) mod 9; in the histogram format (4 fractional bits) half of an 11-bit, 3-fraction-bit
// magnitude is the same integer, so no bit is lost. A sum tree per bin adds the contributions of
// the PPC pixels of a vector, which matters when several pixels of a vector hit the same bin.
// The histograms of one row of cells are held in registers (not block RAM), one 9 x 18-bit
// histogram per cell column, so the read-modify-write of a vector takes one cycle. The first
// vector of a cell (top-left) overwrites the registers, so no clearing pass or double buffer is
// needed; the last vector (bottom-right) sends out the finished histogram.
//
// Timing: two stages (sum tree, accumulate). A finished cell leaves one cycle after its last
// vector's sums; during the last pixel row of a cell row one cell leaves every CELL/PPC vectors.
module cell_histogram
  import hog_pkg::*;
#(
  parameter int unsigned WIDTH = 3840
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            in_valid,
  input  grad_t [PPC-1:0] in_grad,
  input  coord_t          in_vx,
  input  coord_t          in_y,
  output logic            out_valid,
  output cell_hist_t      out_hist,
  output coord_t          out_cx,
  output coord_t          out_cy
);
  localparam int unsigned NCX = WIDTH / CELL;   // cells per row
  localparam int unsigned VPC = CELL / PPC;     // vectors per cell row
  localparam int unsigned CXW = $clog2(NCX);    // bank index width
  localparam coord_t      VPC_C  = coord_t'(VPC);
  localparam coord_t      CELL_C = coord_t'(CELL);

  // Stage 1: per-bin sum tree over the vector.
  logic       s1_valid, s1_first, s1_last;
  hist_t      s1_sum [NBINS];
  coord_t     s1_cx, s1_cy;

  always_ff @(posedge clk) begin
    if (rst) s1_valid <= 1'b0;
    else     s1_valid <= in_valid;
    if (in_valid) begin
      s1_cx    <= in_vx / VPC_C;
      s1_cy    <= in_y / CELL_C;
      s1_first <= (in_vx % VPC_C == '0) && (in_y % CELL_C == '0);
      s1_last  <= (in_vx % VPC_C == VPC_C - 1'b1) && (in_y % CELL_C == CELL_C - 1'b1);
      for (int b = 0; b < int'(NBINS); b++) begin
        hist_t acc;
        acc = '0;
        for (int k = 0; k < int'(PPC); k++) begin
          bin_t up;
          up = (in_grad[k].bin == bin_t'(NBINS - 1)) ? '0 : in_grad[k].bin + 1'b1;
          if (in_grad[k].bin == bin_t'(b)) acc = acc + hist_t'(in_grad[k].mag);
          if (up == bin_t'(b))             acc = acc + hist_t'(in_grad[k].mag);
        end
        s1_sum[b] <= acc;
      end
    end
  end

  // Stage 2: accumulate into the register bank of the current cell row.
  cell_hist_t bank [NCX];

  always_ff @(posedge clk) begin
    if (rst) out_valid <= 1'b0;
    else     out_valid <= s1_valid && s1_last;
    if (s1_valid) begin
      cell_hist_t nxt;
      for (int b = 0; b < int'(NBINS); b++)
        nxt[b] = s1_first ? s1_sum[b] : bank[s1_cx[CXW-1:0]][b] + s1_sum[b];
      bank[s1_cx[CXW-1:0]] <= nxt;
      if (s1_last) begin
        out_hist <= nxt;
        out_cx   <= s1_cx;
        out_cy   <= s1_cy;
      end
    end
  end
endmodule
