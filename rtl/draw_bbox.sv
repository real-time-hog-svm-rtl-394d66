// draw_bbox: draws the outlines of up to MAX_BOXES rectangles into the 4-pixel-per-clock output
// video stream.
//
// The processor writes the boxes that survived its non-maximum suppression into a box table
// (box_we, box_idx, corners x0,y0,x1,y1 inclusive, enable). The table is copied into the active
// set at each start of frame, so a frame is never drawn with a half-updated list. A pixel on the
// border of any enabled box (x equal to x0 or x1 with y in [y0,y1], or y equal to y0 or y1 with
// x in [x0,x1]) is replaced by white (255); all other pixels pass unchanged. The boxes drawn
// into a frame are those the processor found in an earlier frame. Line thickness 1 pixel, the
// colour and MAX_BOXES are this design's choices.
// Timing: one register stage; start-of-frame and end-of-line flags travel with the data.
module draw_bbox
  import hog_pkg::*;
#(
  parameter int unsigned WIDTH     = 3840,
  parameter int unsigned MAX_BOXES = 16
) (
  input  logic                 clk,
  input  logic                 rst,
  // box table write port (processor)
  input  logic                 box_we,
  input  logic [$clog2(MAX_BOXES)-1:0] box_idx,
  input  logic                 box_en,
  input  coord_t               box_x0, box_y0, box_x1, box_y1,
  // video in
  input  logic                 s_valid,
  input  logic [PPC*PIX_W-1:0] s_data,
  input  logic                 s_sof,
  input  logic                 s_eol,
  // video out
  output logic                 m_valid,
  output logic [PPC*PIX_W-1:0] m_data,
  output logic                 m_sof,
  output logic                 m_eol,
  output logic                 drawn      // some pixel of this output vector was overwritten
);
  typedef struct packed {
    logic   en;
    coord_t x0, y0, x1, y1;
  } box_t;

  box_t table_q [MAX_BOXES];
  box_t active  [MAX_BOXES];

  always_ff @(posedge clk) begin
    if (rst) begin
      for (int i = 0; i < int'(MAX_BOXES); i++) table_q[i].en <= 1'b0;
    end else if (box_we) begin
      table_q[box_idx] <= '{en: box_en, x0: box_x0, y0: box_y0, x1: box_x1, y1: box_y1};
    end
  end

  // Position of the incoming vector.
  coord_t vx, py;
  coord_t cur_vx, cur_y;
  assign cur_vx = s_sof ? '0 : vx;
  assign cur_y  = s_sof ? '0 : py;

  always_ff @(posedge clk) begin
    if (rst) begin
      vx <= '0;
      py <= '0;
      for (int i = 0; i < int'(MAX_BOXES); i++) active[i].en <= 1'b0;
    end else if (s_valid) begin
      if (s_sof) active <= table_q;
      if (s_eol || cur_vx == coord_t'(WIDTH / PPC - 1)) begin
        vx <= '0;
        py <= cur_y + 1'b1;
      end else begin
        vx <= cur_vx + 1'b1;
        py <= cur_y;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst) m_valid <= 1'b0;
    else     m_valid <= s_valid;
    if (s_valid) begin
      logic any;
      any = 1'b0;
      m_sof <= s_sof;
      m_eol <= s_eol;
      for (int k = 0; k < int'(PPC); k++) begin
        coord_t x;
        logic   hit;
        x   = coord_t'(int'(cur_vx) * int'(PPC) + k);
        hit = 1'b0;
        for (int i = 0; i < int'(MAX_BOXES); i++) begin
          // the table is taken over at start of frame; use the new table for that vector too
          box_t b;
          b = s_sof ? table_q[i] : active[i];
          if (b.en && (((x == b.x0 || x == b.x1) && cur_y >= b.y0 && cur_y <= b.y1) ||
                       ((cur_y == b.y0 || cur_y == b.y1) && x >= b.x0 && x <= b.x1)))
            hit = 1'b1;
        end
        m_data[PIX_W*k +: PIX_W] <= hit ? {PIX_W{1'b1}} : s_data[PIX_W*k +: PIX_W];
        any = any | hit;
      end
      drawn <= any;
    end else begin
      drawn <= 1'b0;
    end
  end
endmodule
