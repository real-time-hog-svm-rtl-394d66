// line_delay: fixed delay of DEPTH enabled steps, the "Line 1 / Line 2" delay lines of the
// context generator and the block-row delays of the SVM.
//
// A circular buffer in a memory array (maps to block RAM in read-first mode). On every cycle with
// en high the word at the pointer is read into dout and overwritten with din, then the pointer
// advances. dout therefore holds, after step n, the din given at step n-DEPTH. dout is a
// register: reading it in the step after counts as one more stage of delay.
module line_delay #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 956
) (
  input  logic             clk,
  input  logic             en,
  input  logic [WIDTH-1:0] din,
  output logic [WIDTH-1:0] dout
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    ptr;   // any start value works for a circular delay

  always_ff @(posedge clk) begin
    if (en) begin
      dout     <= mem[ptr];
      mem[ptr] <= din;
      ptr      <= (ptr >= AW'(DEPTH - 1)) ? '0 : ptr + 1'b1;
    end
  end
endmodule
