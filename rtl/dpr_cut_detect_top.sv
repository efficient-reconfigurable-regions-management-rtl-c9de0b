// Top level of the adaptive cut detection system: the cut detector that the
// system loads into a reconfigurable partition, and the static-side path that
// relocates its partial bitstream on the way to the configuration port.
//
// On the FPGA the cut detector (CSD_8, CSD_16 or CSD_32) lives in one of the
// partitions of a partially reconfigurable region and is loaded on demand;
// only one bitstream is stored per version, generated for its first
// partition, and the FAR relocation filter adapts it to the partition chosen
// at run time. In RTL both parts are simply instantiated side by side: the
// choice of version is the N_COLORS parameter (default 32, the largest
// version), and the relocated configuration words leave on cfg_* towards the
// internal configuration access port (ICAP), which is a device primitive and
// not part of this RTL. Partition pins and the static-region bus macros are
// placement constraints without logic and have no counterpart here.
//
// Interface: video side as in cut_detector; configuration side one 32-bit
// word per cycle in (bs_*) and out (cfg_*) with one cycle of latency; reloc
// selects the target partition. Frame size defaults are those of the text
// (480-pixel lines, 640 lines).
module dpr_cut_detect_top
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
  // video analysis (reconfigurable module)
  input  logic                        sof,
  input  logic                        pix_valid,
  input  logic [CW-1:0]               pix,
  input  logic [DW-1:0]               threshold,
  output logic [N_COLORS-1:0][CN-1:0] csd,
  output logic                        dist_valid,
  output logic [DW-1:0]               distance,
  output logic                        detect_en,
  // partial bitstream relocation (static part)
  input  reloc_t                      reloc,
  input  logic                        bs_valid,
  input  logic [CFG_W-1:0]            bs_data,
  output logic                        cfg_valid,
  output logic [CFG_W-1:0]            cfg_data,
  output logic [31:0]                 cfg_word_count,
  output logic [15:0]                 cfg_far_count
);
  cut_detector #(.N_COLORS(N_COLORS), .WIDTH(WIDTH), .HEIGHT(HEIGHT)) u_cut (
    .clk       (clk),
    .rst_n     (rst_n),
    .sof       (sof),
    .pix_valid (pix_valid),
    .pix       (pix),
    .threshold (threshold),
    .csd       (csd),
    .dist_valid(dist_valid),
    .distance  (distance),
    .detect_en (detect_en)
  );

  far_relocator u_reloc (
    .clk       (clk),
    .rst_n     (rst_n),
    .reloc     (reloc),
    .in_valid  (bs_valid),
    .in_data   (bs_data),
    .out_valid (cfg_valid),
    .out_data  (cfg_data),
    .word_count(cfg_word_count),
    .far_count (cfg_far_count)
  );
endmodule
