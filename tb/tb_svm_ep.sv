// tb_svm_ep: a stream of random blocks, as four cells each, through one processing element at
// window position (3, 5). For every block the element must output the left partial score given
// with the fourth cell plus the exact dot product of the 36 features with the coefficients of
// that position (computed here from the coefficient formula), in the cycle after the last cell
// is accumulated, signalled by blk_done.
module tb_svm_ep;
  import hog_pkg::*;
  localparam int BY = 3, BX = 5;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic       in_valid, blk_done;
  logic [1:0] in_cell;
  cell_feat_t in_feat;
  score_t     left_sum, out_sum;

  svm_ep #(.BY(BY), .BX(BX)) dut (.clk, .rst, .in_valid, .in_cell, .in_feat, .left_sum,
    .out_sum, .blk_done);

  localparam int N = 200;
  block_feat_t blk [N];
  longint      lefts [N];
  int got = 0;

  always @(posedge clk) begin
    if (!rst && blk_done) begin
      longint e;
      e = lefts[got];
      for (int i = 0; i < 36; i++) e += longint'(blk[got][i]) * longint'(svm_default_coef(BY, BX, i));
      checks++;
      if (longint'(out_sum) != e) begin
        failures++;
        if (failures < 10) $display("FAIL block %0d got %0d exp %0d", got, out_sum, e);
      end
      got++;
    end
  end

  initial begin
    in_valid = 0;
    for (int b = 0; b < N; b++) begin
      for (int i = 0; i < 36; i++) blk[b][i] = feat_t'($urandom);
      if (b == 0) for (int i = 0; i < 36; i++) blk[b][i] = '1;       // largest features
      lefts[b] = longint'($signed(32'($urandom))) >>> 2;
    end
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int b = 0; b < N; b++) begin
      for (int c = 0; c < 4; c++) begin
        @(posedge clk);
        in_valid <= 1; in_cell <= 2'(c);
        for (int i = 0; i < 9; i++) in_feat[i] <= blk[b][9*c+i];
        if (c == 3) fork begin
          automatic int bb = b;
          @(posedge clk); left_sum <= score_t'(lefts[bb]);   // valid when the sum is formed
        end join_none
      end
      if (b % 5 == 4) begin @(posedge clk) in_valid <= 0; end
    end
    @(posedge clk) in_valid <= 0;
    repeat (10) @(posedge clk);
    checks++;
    if (got != N) begin
      failures++;
      $display("FAIL %0d results, expected %0d", got, N);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
