// Line FIFO of the structure element block: a fixed-length delay line that
// outputs, on every push, the value pushed DEPTH pushes earlier.
//
// The structure element needs seven of these ("FIFO line 1..7"), each holding
// the part of an image line that is not in the 8x8 register window, so DEPTH
// is the line width minus 8. It is written as a circular buffer in a memory
// array (one write and one read per push), which maps onto block RAM; the
// read is asynchronous and returns the oldest entry before it is overwritten.
// Timing: push and dout are valid in the same cycle; the entry is replaced at
// the clock edge. The memory is not reset (its contents are overwritten during
// the first line of each frame, and no window position that uses them is
// counted before that); the pointer is.
module line_fifo #(
  parameter int unsigned DW    = 5,
  parameter int unsigned DEPTH = 472
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          push,
  input  logic [DW-1:0] din,
  output logic [DW-1:0] dout
);
  localparam int unsigned AW = (DEPTH > 1) ? $clog2(DEPTH) : 1;

  logic [DW-1:0] mem [DEPTH];
  logic [AW-1:0] ptr;

  assign dout = mem[ptr];

  always_ff @(posedge clk) begin
    if (push) mem[ptr] <= din;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                             ptr <= '0;
    else if (push && ptr == AW'(DEPTH - 1)) ptr <= '0;
    else if (push)                          ptr <= ptr + 1'b1;
  end
endmodule
