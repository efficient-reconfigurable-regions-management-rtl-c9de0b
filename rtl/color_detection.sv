// Color detection block: flags every quantized color present in the 8x8
// structuring element.
//
// It holds one color detector per color (n = N_COLORS, the number of
// quantization levels: 8, 16 or 32 in the three versions of the cut
// detector); output bit k is 1 when color k occurs at least once in the
// window. The bits drive the increment inputs of the histogram update block.
// Purely combinational: present follows win in the same cycle.
module color_detection
  import csd_pkg::*;
#(
  parameter int unsigned N_COLORS = 32,
  localparam int unsigned CW      = color_width(N_COLORS)
) (
  input  logic [SW-1:0][SW-1:0][CW-1:0] win,
  output logic [N_COLORS-1:0]           present
);
  for (genvar k = 0; k < N_COLORS; k++) begin : g_color
    color_detector #(.CW(CW), .COLOR(k)) u_det (
      .win    (win),
      .present(present[k])
    );
  end
endmodule
