// CSD extraction: computes the MPEG-7 color structure histogram of each frame.
//
// Chain of the three blocks of the system figure: the structure element block
// forms the 8x8 window over the incoming quantized pixels, the color detection
// block flags the colors present in it, and the histogram update block counts,
// per color, the window positions that contain it. Bin k of the result is the
// number of the NP element positions of the frame in which color k occurs.
//
// Interface: pixels are color indices (0 .. N_COLORS-1) already quantized; the
// color quantization itself lies outside this module. One pixel per cycle at
// most (pix_valid), sof with the first pixel of a frame.
// Timing: csd_valid pulses for one cycle, two cycles after the last pixel of a
// frame, with the complete histogram on csd; the bins are cleared at the end
// of that cycle, ready for the next frame (this frame-boundary handling is
// this design's choice). Pixels may continue without a gap.
module csd_extractor
  import csd_pkg::*;
#(
  parameter int unsigned N_COLORS = 32,
  parameter int unsigned WIDTH    = IMG_WIDTH,
  parameter int unsigned HEIGHT   = IMG_HEIGHT,
  localparam int unsigned CW      = color_width(N_COLORS),
  localparam int unsigned CN      = counter_width(HEIGHT, WIDTH)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        sof,
  input  logic                        pix_valid,
  input  logic [CW-1:0]               pix,
  output logic [N_COLORS-1:0][CN-1:0] csd,
  output logic                        csd_valid
);
  logic [SW-1:0][SW-1:0][CW-1:0] win;
  logic                          win_valid;
  logic                          frame_done;
  logic [N_COLORS-1:0]           present;

  structure_element #(.N_COLORS(N_COLORS), .WIDTH(WIDTH), .HEIGHT(HEIGHT)) u_se (
    .clk       (clk),
    .rst_n     (rst_n),
    .sof       (sof),
    .pix_valid (pix_valid),
    .pix       (pix),
    .win       (win),
    .win_valid (win_valid),
    .frame_done(frame_done)
  );

  color_detection #(.N_COLORS(N_COLORS)) u_cd (
    .win    (win),
    .present(present)
  );

  histogram_update #(.N_COLORS(N_COLORS), .CN(CN)) u_hu (
    .clk    (clk),
    .rst_n  (rst_n),
    .clr    (csd_valid),
    .inc_en (win_valid),
    .present(present),
    .bin_count(csd)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) csd_valid <= 1'b0;
    else        csd_valid <= frame_done;
  end
endmodule
