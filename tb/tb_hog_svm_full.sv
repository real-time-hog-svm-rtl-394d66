// tb_hog_svm_full: the detector at its full size, 3840x2160 pixels at 4 pixels per clock, with
// every parameter at its default: two complete frames (120615 window scores each) checked end
// to end by hog_e2e_checker, including the drawing of the first frame's boxes into the second.
module tb_hog_svm_full;
  import hog_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks, failures;
  logic done;

  logic rst;
  logic [31:0] s_axis_tdata, m_axis_tdata;
  logic s_axis_tvalid, s_axis_tready, s_axis_tuser, s_axis_tlast;
  logic m_axis_tvalid, m_axis_tuser, m_axis_tlast;
  logic score_valid, bb_rd_en, bb_overflow, bb_done_irq, box_we, box_en;
  score_t score;
  coord_t win_x, win_y, box_x0, box_y0, box_x1, box_y1;
  logic [9:0] bb_rd_addr;
  logic [2*COORD_W+SCORE_W-1:0] bb_rd_data;
  logic [10:0] bb_frame_count;
  logic [3:0] box_idx;

  hog_svm_top dut (.*);

  hog_e2e_checker #(.W(3840), .H(2160), .FRAMES(2), .BBOX_DEPTH(1024), .MAX_BOXES(16)) chk (
    .clk, .rst, .s_tdata(s_axis_tdata), .s_tvalid(s_axis_tvalid), .s_tready(s_axis_tready),
    .s_tuser(s_axis_tuser), .s_tlast(s_axis_tlast), .m_tdata(m_axis_tdata), .m_tvalid(m_axis_tvalid),
    .m_tuser(m_axis_tuser), .m_tlast(m_axis_tlast),
    .score_valid, .score, .win_x, .win_y, .bb_rd_en, .bb_rd_addr, .bb_rd_data,
    .bb_frame_count, .bb_overflow, .bb_done_irq, .box_we, .box_idx, .box_en, .box_x0, .box_y0,
    .box_x1, .box_y1,
    .p_grad_valid(dut.g_valid), .p_grad(dut.grad),
    .p_hist_valid(dut.h_valid), .p_hist(dut.hist), .p_hist_cx(dut.h_cx), .p_hist_cy(dut.h_cy),
    .p_feat_valid(dut.n_valid), .p_feat(dut.feat), .p_feat_bx(dut.n_bx), .p_feat_by(dut.n_by),
    .p_clip(dut.n_clip), .p_backlog(16'(dut.f_backlog)), .p_drawn(dut.drawn),
    .checks, .failures, .done);

  initial begin
    repeat (2) @(posedge clk);
    wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (6000000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
