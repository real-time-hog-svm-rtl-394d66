// context_gen: rebuilds the 3x3 neighbourhood of every pixel of a 4-pixel-per-clock video stream.
//
// Each of the three image rows in flight has three vector registers (the current, the previous
// and the one before); two line delays of LINE-4 vectors connect the rows, so that the middle
// register of the middle row holds vector p and its eight neighbouring vectors are at hand.
// The 3x3 context of each of the PPC pixels of vector p is cut out of this flattened 3x(3*PPC)
// window. Pixels outside the image are replaced by the nearest pixel inside (edge replication).
//
// Interface: AXI4-Stream-like input (s_valid/s_ready, s_data with pixel k in bits 8k+7:8k,
// pixel 0 leftmost). The frame size is fixed by WIDTH and HEIGHT; s_sof is only checked, not
// used. Output: one context vector per accepted input vector, with the vector column m_vx and
// row m_y of its centre pixels.
// Timing: the context of vector p leaves when vector p+LINE+1 has arrived (one line plus one
// vector, plus one register). After the last vector of a frame the module drops s_ready for
// LINE+1 cycles and shifts in blanks to flush the last line (this design's choice; the source
// describes only the registers and delay lines).
module context_gen
  import hog_pkg::*;
#(
  parameter int unsigned WIDTH  = 3840,
  parameter int unsigned HEIGHT = 2160
) (
  input  logic             clk,
  input  logic             rst,
  input  logic             s_valid,
  output logic             s_ready,
  input  logic [PPC*PIX_W-1:0] s_data,
  input  logic             s_sof,
  output logic             m_valid,
  output ctx3_t [PPC-1:0]  m_ctx,
  output coord_t           m_vx,
  output coord_t           m_y
);
  localparam int unsigned LINE  = WIDTH / PPC;     // vectors per line
  localparam int unsigned TOTAL = LINE * HEIGHT;   // vectors per frame

  typedef pix_t [PPC-1:0] vec_t;

  vec_t b0, b1, b2, m0, m1, m2, t0, t1, t2;   // bottom, middle, top rows
  vec_t l1_out, l2_out;

  logic        flushing;
  logic [31:0] in_cnt;     // vectors taken in this frame
  logic [31:0] out_cnt;    // vectors shifted in (taken or flushed)
  logic        ev;

  assign s_ready = !flushing;
  assign ev      = (s_valid && s_ready) || flushing;

  always_ff @(posedge clk) begin
    if (ev) begin
      b0 <= flushing ? vec_t'('0) : vec_t'(s_data);
      b1 <= b0;  b2 <= b1;
      m0 <= l1_out; m1 <= m0; m2 <= m1;
      t0 <= l2_out; t1 <= t0; t2 <= t1;
    end
  end

  line_delay #(.WIDTH(PPC*PIX_W), .DEPTH(LINE-4)) u_line1 (.clk, .en(ev), .din(b2), .dout(l1_out));
  line_delay #(.WIDTH(PPC*PIX_W), .DEPTH(LINE-4)) u_line2 (.clk, .en(ev), .din(m2), .dout(l2_out));

  // Counting: the centre vector m1 after step n is vector n-LINE-1 of the frame.
  always_ff @(posedge clk) begin
    if (rst) begin
      flushing <= 1'b0;
      in_cnt   <= '0;
      out_cnt  <= '0;
    end else if (ev) begin
      out_cnt <= out_cnt + 1;
      if (!flushing) begin
        in_cnt <= in_cnt + 1;
        if (in_cnt == TOTAL - 1) flushing <= 1'b1;
      end
      if (out_cnt == TOTAL + LINE) begin
        flushing <= 1'b0;
        in_cnt   <= '0;
        out_cnt  <= '0;
      end
    end
  end

  // The context is cut one cycle after the shift; valid once the centre is inside the frame.
  logic   c_valid;
  coord_t cx, cy;
  always_ff @(posedge clk) begin
    if (rst) begin
      c_valid <= 1'b0;
      cx <= '0; cy <= '0;
    end else begin
      c_valid <= ev && (out_cnt >= LINE + 1);
      if (ev && out_cnt >= LINE + 1) begin
        if (out_cnt == LINE + 1) begin
          cx <= '0; cy <= '0;
        end else if (cx == coord_t'(LINE - 1)) begin
          cx <= '0; cy <= cy + 1'b1;
        end else begin
          cx <= cx + 1'b1;
        end
      end
    end
  end

  // Flattened rows: element j of row r is the pixel at column 4*(p-1)+j, j = 0 .. 3*PPC-1.
  function automatic pix_t flat(vec_t a2, vec_t a1, vec_t a0, int j);
    if (j < int'(PPC))          return a2[j];
    else if (j < 2 * int'(PPC)) return a1[j - int'(PPC)];
    else                        return a0[j - 2 * int'(PPC)];
  endfunction

  always_ff @(posedge clk) begin
    if (rst) m_valid <= 1'b0;
    else     m_valid <= c_valid;
    if (c_valid) begin
      m_vx <= cx;
      m_y  <= cy;
      for (int k = 0; k < int'(PPC); k++) begin
        int col;
        int jl, jr;
        col = int'(cx) * int'(PPC) + k;
        jl  = (col == 0) ? int'(PPC) + k : int'(PPC) + k - 1;
        jr  = (col == int'(WIDTH) - 1) ? int'(PPC) + k : int'(PPC) + k + 1;
        for (int c = 0; c < 3; c++) begin
          int j;
          j = (c == 0) ? jl : (c == 1) ? int'(PPC) + k : jr;
          m_ctx[k][1][c] <= flat(m2, m1, m0, j);
          m_ctx[k][0][c] <= (cy == 0) ? flat(m2, m1, m0, j) : flat(t2, t1, t0, j);
          m_ctx[k][2][c] <= (cy == coord_t'(HEIGHT - 1)) ? flat(m2, m1, m0, j) : flat(b2, b1, b0, j);
        end
      end
    end
  end

  // The first vector of a frame should carry the start-of-frame flag.
  always_ff @(posedge clk)
    if (!rst && s_valid && s_ready)
      assert (s_sof == (in_cnt == 0))
        else $error("context_gen: start-of-frame flag out of step with the frame counter");
endmodule
