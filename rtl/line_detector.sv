// Line detector: tells whether a given color occurs in one line of the 8x8
// structuring element.
//
// Following the color detection figure, each of the eight registers of the
// line (Li-R1 .. Li-R8) is compared with the color, and the eight equality
// results are ORed. Purely combinational; the output follows the inputs in
// the same cycle.
module line_detector
  import csd_pkg::*;
#(
  parameter int unsigned CW = 5
) (
  input  logic [SW-1:0][CW-1:0] line_pix,
  input  logic [CW-1:0]         color,
  output logic                  present
);
  logic [SW-1:0] hit;

  always_comb begin
    for (int j = 0; j < SW; j++) hit[j] = (line_pix[j] == color);
    present = |hit;
  end
endmodule
