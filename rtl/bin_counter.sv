// Color bin counter: one histogram bin of the histogram update block.
//
// A CN-bit counter that adds one in every cycle in which inc is high and
// returns to zero when clr is high (clr wins). CN is Cn of the text, chosen so
// that 2^Cn >= NP, the number of structuring element positions in a frame, so
// the counter cannot overflow within a frame. The synchronous clear at the
// frame boundary is this design's choice. The count is registered: it shows an
// increment in the cycle after inc.
module bin_counter #(
  parameter int unsigned CN = 19
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          inc,
  output logic [CN-1:0] count
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)   count <= '0;
    else if (clr) count <= '0;
    else if (inc) count <= count + 1'b1;
  end
endmodule
