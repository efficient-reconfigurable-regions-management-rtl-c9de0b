// Color detector: tells whether one quantized color occurs anywhere in the
// 8x8 structuring element.
//
// As in the system figure, it is applied line by line: eight line detectors
// (one per window line L1..L8) each flag the color in their line, and their
// outputs are ORed into one presence bit. The color is a parameter, since each
// detector of the color detection block is bound to one histogram bin.
// Purely combinational.
module color_detector
  import csd_pkg::*;
#(
  parameter int unsigned CW    = 5,
  parameter int unsigned COLOR = 0
) (
  input  logic [SW-1:0][SW-1:0][CW-1:0] win,
  output logic                          present
);
  logic [SW-1:0] line_hit;

  for (genvar i = 0; i < SW; i++) begin : g_line
    line_detector #(.CW(CW)) u_line (
      .line_pix(win[i]),
      .color   (CW'(COLOR)),
      .present (line_hit[i])
    );
  end

  assign present = |line_hit;
endmodule
