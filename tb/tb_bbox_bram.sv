// tb_bbox_bram: three frames of detections written on the detector port; after each frame_done
// the list is read back on the processor port and compared entry by entry. The third frame
// writes more entries than the memory holds: the count must stop at DEPTH and overflow be set.
// Also checked: one-cycle read latency, done_irq one cycle after frame_done, and the count
// restarting at frame_start.
module tb_bbox_bram;
  import hog_pkg::*;
  localparam int DEPTH = 16;
  logic clk = 0, rst = 1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic frame_start, frame_done, det_valid, rd_en, overflow, done_irq;
  coord_t det_x, det_y;
  score_t det_score;
  logic [3:0] rd_addr;
  logic [2*COORD_W+SCORE_W-1:0] rd_data;
  logic [4:0] frame_count;

  bbox_bram #(.DEPTH(DEPTH)) dut (.clk, .rst, .frame_start, .frame_done, .det_valid, .det_x,
    .det_y, .det_score, .rd_en, .rd_addr, .rd_data, .frame_count, .overflow, .done_irq);

  logic [2*COORD_W+SCORE_W-1:0] written [$];
  int irqs = 0;
  always @(posedge clk) if (!rst && done_irq) irqs++;

  task automatic frame(int n);
    written.delete();
    @(posedge clk) frame_start <= 1;
    @(posedge clk) frame_start <= 0;
    for (int i = 0; i < n; i++) begin
      @(posedge clk);
      det_valid <= 1;
      det_x <= coord_t'($urandom); det_y <= coord_t'($urandom); det_score <= score_t'($urandom);
      #1 written.push_back({det_x, det_y, det_score});
      @(posedge clk) det_valid <= 0;
    end
    @(posedge clk) frame_done <= 1;
    @(posedge clk) frame_done <= 0;
    @(posedge clk);
    #1;
    checks++;
    if (int'(frame_count) != (n > DEPTH ? DEPTH : n) || overflow != (n > DEPTH) || irqs == 0) begin
      failures++;
      $display("FAIL count %0d overflow %0d for %0d detections", frame_count, overflow, n);
    end
    irqs = 0;
    for (int i = 0; i < int'(frame_count); i++) begin
      @(posedge clk) begin rd_en <= 1; rd_addr <= 4'(i); end
      @(posedge clk) rd_en <= 0;
      #1;
      checks++;
      if (rd_data != written[i]) begin
        failures++;
        $display("FAIL entry %0d", i);
      end
    end
  endtask

  initial begin
    frame_start = 0; frame_done = 0; det_valid = 0; rd_en = 0; rd_addr = 0;
    repeat (3) @(posedge clk);
    rst <= 0;
    frame(5);
    frame(11);
    frame(DEPTH + 7);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
