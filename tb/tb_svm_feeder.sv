// tb_svm_feeder: bursts of block vectors (one per cycle, faster than the SVM takes them) and
// sparse blocks. Each block must leave as four cells on four consecutive cycles, cell index
// 0..3 carrying features 0-8, 9-17, 18-26, 27-35, with its coordinates, in arrival order, and
// the output must have no gap while blocks wait (the queues absorb the burst).
module tb_svm_feeder;
  import hog_pkg::*;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        in_valid, out_valid;
  block_feat_t in_feat;
  coord_t      in_bx, in_by, out_bx, out_by;
  logic [1:0]  out_cell;
  cell_feat_t  out_feat;
  logic [8:0]  backlog;

  svm_feeder #(.DEPTH(256)) dut (.clk, .rst, .in_valid, .in_feat, .in_bx, .in_by,
    .out_valid, .out_cell, .out_feat, .out_bx, .out_by, .backlog);

  localparam int N = 300;
  block_feat_t blk [N];
  int got_cells = 0, max_backlog = 0, idle_while_waiting = 0;
  logic prev_valid = 0;

  always @(posedge clk) begin
    if (!rst) begin
      if (int'(backlog) > max_backlog) max_backlog = int'(backlog);
      if (!out_valid && prev_valid && backlog != 0) idle_while_waiting++;
      prev_valid <= out_valid;
    end
    if (!rst && out_valid) begin
      int b, c;
      b = got_cells / 4; c = got_cells % 4;
      checks++;
      if (int'(out_cell) != c || out_bx != coord_t'(b % 50) || out_by != coord_t'(b / 50)) begin
        failures++;
        $display("FAIL cell %0d of block %0d: index %0d coords %0d,%0d", c, b, out_cell, out_bx, out_by);
      end
      for (int i = 0; i < 9; i++) begin
        checks++;
        if (out_feat[i] != blk[b][9*c+i]) begin
          failures++;
          if (failures < 10) $display("FAIL block %0d cell %0d feature %0d", b, c, i);
        end
      end
      got_cells++;
    end
  end

  initial begin
    in_valid = 0;
    for (int b = 0; b < N; b++)
      for (int i = 0; i < 36; i++) blk[b][i] = feat_t'($urandom);
    repeat (3) @(posedge clk);
    rst <= 0;
    for (int b = 0; b < N; b++) begin
      @(posedge clk);
      in_valid <= 1; in_feat <= blk[b]; in_bx <= coord_t'(b % 50); in_by <= coord_t'(b / 50);
      if (b >= 200) begin   // sparse tail
        @(posedge clk) in_valid <= 0;
        repeat ($urandom_range(6, 0)) @(posedge clk);
      end
    end
    @(posedge clk) in_valid <= 0;
    repeat (1200) @(posedge clk);
    checks++;
    if (got_cells != 4 * N || max_backlog < 100 || idle_while_waiting != 0) begin
      failures++;
      $display("FAIL cells %0d (exp %0d), max backlog %0d, idle cycles with blocks waiting %0d",
               got_cells, 4 * N, max_backlog, idle_while_waiting);
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
