// svm_feeder: controller with four FIFO queues that turns one 36-element block feature vector
// per cycle into four 9-element cell vectors on four consecutive cycles.
//
// A block vector is written into all four queues at once, one cell (9 features) per queue; the
// block coordinates travel in queue 0. The controller reads queue 0, 1, 2, 3 in turn and sends
// each cell with its index (out_cell = 0..3, in the block order top-left, top-right,
// bottom-left, bottom-right), so the SVM needs only 9 multipliers per processing element
// instead of 36. A new block starts as soon as the previous one is sent, so the output is
// gap-free while the queues hold data: the SVM takes one block per 4 cycles, and the queues
// absorb the bursts of the block normalisation (up to one block per 2 cycles during the last
// pixel row of a cell row). DEPTH is this design's choice: 256 blocks hold a whole 4K burst.
// Timing: registered output; a block's first cell leaves 1 cycle after it is read.
module svm_feeder
  import hog_pkg::*;
#(
  parameter int unsigned DEPTH = 256
) (
  input  logic        clk,
  input  logic        rst,
  input  logic        in_valid,
  input  block_feat_t in_feat,
  input  coord_t      in_bx,
  input  coord_t      in_by,
  output logic        out_valid,
  output logic [1:0]  out_cell,
  output cell_feat_t  out_feat,
  output coord_t      out_bx,
  output coord_t      out_by,
  output logic [$clog2(DEPTH+1)-1:0] backlog   // blocks waiting in the queues
);
  localparam int unsigned W0 = $bits(cell_feat_t) + 2 * COORD_W;

  logic [3:0]       q_empty, q_full, q_pop;
  logic [W0-1:0]    q0_dout;
  cell_feat_t       q_dout [1:4];
  logic [$clog2(DEPTH+1)-1:0] q_count [4];

  sync_fifo #(.WIDTH(W0), .DEPTH(DEPTH)) u_q0 (
    .clk, .rst, .push(in_valid), .din({in_feat[8:0], in_bx, in_by}), .pop(q_pop[0]),
    .dout(q0_dout), .empty(q_empty[0]), .full(q_full[0]), .count(q_count[0]));

  for (genvar g = 1; g < 4; g++) begin : g_q
    sync_fifo #(.WIDTH($bits(cell_feat_t)), .DEPTH(DEPTH)) u_q (
      .clk, .rst, .push(in_valid), .din(in_feat[9*g +: 9]), .pop(q_pop[g]),
      .dout(q_dout[g]), .empty(q_empty[g]), .full(q_full[g]), .count(q_count[g]));
  end

  assign backlog = q_count[0];

  // Controller: phase 0 waits for a block, phases 1..3 follow unconditionally.
  logic [1:0] phase;
  always_comb begin
    q_pop = '0;
    if (phase == 2'd0) q_pop[0] = !q_empty[0];
    else               q_pop[phase] = 1'b1;
  end

  coord_t cur_bx, cur_by;
  always_ff @(posedge clk) begin
    if (rst) begin
      phase     <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= |q_pop;
      if (|q_pop) phase <= phase + 1'b1;
    end
    if (|q_pop) begin
      out_cell <= phase;
      if (phase == 2'd0) begin
        out_feat <= q0_dout[W0-1 -: $bits(cell_feat_t)];
        out_bx   <= q0_dout[2*COORD_W-1 -: COORD_W];
        out_by   <= q0_dout[COORD_W-1:0];
        cur_bx   <= q0_dout[2*COORD_W-1 -: COORD_W];
        cur_by   <= q0_dout[COORD_W-1:0];
      end else begin
        out_feat <= q_dout[phase];
        out_bx   <= cur_bx;
        out_by   <= cur_by;
      end
    end
  end

  always_ff @(posedge clk)
    if (!rst) assert (!(in_valid && q_full[0])) else $error("svm_feeder: block queue overflow");
endmodule
