// bbox_bram: dual-port memory of the windows classified as pedestrians in the current frame.
//
// Port A (detector side) appends one entry per detection: window position and score. The
// write counter restarts at frame_start; at frame_done the number of entries is latched into
// frame_count and done_irq pulses, which is when the processor may read the list through port B
// (registered read, one cycle latency) and run its non-maximum suppression. Entries beyond
// DEPTH are dropped and counted in overflow. DEPTH is this design's choice.
module bbox_bram
  import hog_pkg::*;
#(
  parameter int unsigned DEPTH = 1024
) (
  input  logic        clk,
  input  logic        rst,
  // detector side
  input  logic        frame_start,
  input  logic        frame_done,
  input  logic        det_valid,
  input  coord_t      det_x,
  input  coord_t      det_y,
  input  score_t      det_score,
  // processor side
  input  logic        rd_en,
  input  logic [$clog2(DEPTH)-1:0] rd_addr,
  output logic [2*COORD_W+SCORE_W-1:0] rd_data,   // {x, y, score}
  output logic [$clog2(DEPTH+1)-1:0]   frame_count,
  output logic        overflow,
  output logic        done_irq
);
  localparam int unsigned AW = $clog2(DEPTH);
  localparam int unsigned DW = 2 * COORD_W + SCORE_W;

  logic [DW-1:0]   mem [DEPTH];
  logic [AW:0]     wr_cnt;

  always_ff @(posedge clk) begin
    if (rst) begin
      wr_cnt      <= '0;
      overflow    <= 1'b0;
      frame_count <= '0;
      done_irq    <= 1'b0;
    end else begin
      done_irq <= frame_done;
      if (frame_start) begin
        wr_cnt   <= '0;
        overflow <= 1'b0;
      end
      if (det_valid) begin
        if (wr_cnt < (AW+1)'(DEPTH)) wr_cnt <= (frame_start ? '0 : wr_cnt) + 1'b1;
        else                         overflow <= 1'b1;
      end
      if (frame_done)
        frame_count <= ($clog2(DEPTH+1))'(wr_cnt + (det_valid && wr_cnt < (AW+1)'(DEPTH) ? 1 : 0));
    end
  end

  // Port A: write.
  always_ff @(posedge clk)
    if (det_valid && (frame_start || wr_cnt < (AW+1)'(DEPTH)))
      mem[frame_start ? '0 : wr_cnt[AW-1:0]] <= {det_x, det_y, det_score};

  // Port B: read.
  always_ff @(posedge clk)
    if (rd_en) rd_data <= mem[rd_addr];
endmodule
