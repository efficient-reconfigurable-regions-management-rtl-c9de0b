// Video cut detector based on the color structure descriptor: the partially
// reconfigurable module of the system, in one version per number of
// quantization levels (N_COLORS = 8, 16 or 32 for CSD_8, CSD_16, CSD_32).
//
// For every frame the CSD extraction computes the color structure histogram.
// It is stored in register set 1 while the previous one moves to register set
// 2; the distance calculation then forms the Manhattan distance between the
// two and reports a cut (detect_en) when it exceeds the threshold alpha.
//
// Interface: quantized pixels in raster order (pix_valid, sof on the first
// pixel of a frame), threshold alpha; out: dist_valid pulses once per frame
// from the second frame on, with distance and detect_en (held until the next
// result); csd is the histogram of the latest frame (register set 1).
// Timing: the CSD is ready two cycles after the last pixel of a frame, the
// register sets load it at the end of that cycle, and the distance result
// follows N_COLORS + 3 cycles later, far inside the seven lines that the next
// frame needs before its first element position. No comparison is made for
// the first frame after reset (this design's choice).
module cut_detector
  import csd_pkg::*;
#(
  parameter int unsigned N_COLORS = 32,
  parameter int unsigned WIDTH    = IMG_WIDTH,
  parameter int unsigned HEIGHT   = IMG_HEIGHT,
  localparam int unsigned CW      = color_width(N_COLORS),
  localparam int unsigned CN      = counter_width(HEIGHT, WIDTH),
  localparam int unsigned DW      = dist_width(N_COLORS, HEIGHT, WIDTH)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        sof,
  input  logic                        pix_valid,
  input  logic [CW-1:0]               pix,
  input  logic [DW-1:0]               threshold,
  output logic [N_COLORS-1:0][CN-1:0] csd,
  output logic                        dist_valid,
  output logic [DW-1:0]               distance,
  output logic                        detect_en
);
  logic [N_COLORS-1:0][CN-1:0] hist, set2;
  logic                        hist_valid, prev_valid, start_q, busy;

  csd_extractor #(.N_COLORS(N_COLORS), .WIDTH(WIDTH), .HEIGHT(HEIGHT)) u_csd (
    .clk      (clk),
    .rst_n    (rst_n),
    .sof      (sof),
    .pix_valid(pix_valid),
    .pix      (pix),
    .csd      (hist),
    .csd_valid(hist_valid)
  );

  csd_register_sets #(.N_COLORS(N_COLORS), .CN(CN)) u_regs (
    .clk       (clk),
    .rst_n     (rst_n),
    .load      (hist_valid),
    .csd_in    (hist),
    .set1      (csd),
    .set2      (set2),
    .prev_valid(prev_valid)
  );

  // Start the distance one cycle after the register sets have been loaded.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) start_q <= 1'b0;
    else        start_q <= hist_valid;
  end

  distance_calc #(.N_COLORS(N_COLORS), .CN(CN), .DW(DW)) u_dist (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (start_q && prev_valid),
    .threshold(threshold),
    .h_cur    (csd),
    .h_prev   (set2),
    .busy     (busy),
    .done     (dist_valid),
    .distance (distance),
    .detect_en(detect_en)
  );

  // A new frame histogram must not arrive while the previous distance is
  // still being summed (cannot happen with frames of at least 8 lines).
  assert property (@(posedge clk) disable iff (!rst_n) start_q |-> !busy)
    else $error("cut_detector: frame finished while the distance was busy");
endmodule
