// Shared constants, types and size functions of the CSD cut detector and of the
// bitstream relocation path.
//
// The cut detector counts, for every position of an 8x8 structuring element
// that lies fully inside a frame, which quantized colors are present (color
// structure descriptor, CSD). Sizes follow the text: sw = 8, a 480-pixel line
// and 640 lines, hence NP = (640-8+1)*(480-8+1) = 299409 element positions and
// Cn = 19-bit bin counters (2^Cn >= NP). The frame address register (FAR)
// layout is the one the text gives for Virtex-5 (block type 3 bits, top/bottom
// 1, row 5, major column 8, minor 7); its placement in bits [23:0] is read from
// the FAR words printed in the relocation example (0x00101400 -> 0x00109400,
// one row up). Packet header and sync values are the words printed in that
// example; the packet-header field layout is the standard Virtex-5 one and is
// this design's addition, not spelled out in the text.
package csd_pkg;

  // Structuring element width (sw).
  localparam int unsigned SW = 8;

  // Default frame size (the text: "height = 640, width = 480").
  localparam int unsigned IMG_WIDTH  = 480;
  localparam int unsigned IMG_HEIGHT = 640;

  // Number of structuring element positions, Eq. 2.
  function automatic int unsigned num_positions(int unsigned height, int unsigned width);
    return (height - SW + 1) * (width - SW + 1);
  endfunction

  // Counter width Cn, Eq. 3: smallest Cn with 2^Cn >= NP.
  function automatic int unsigned counter_width(int unsigned height, int unsigned width);
    return $clog2(num_positions(height, width));
  endfunction

  // Width of a color index for n quantization levels.
  function automatic int unsigned color_width(int unsigned n_colors);
    return (n_colors > 1) ? $clog2(n_colors) : 1;
  endfunction

  // Width of the Manhattan distance: n bins of Cn bits each.
  function automatic int unsigned dist_width(int unsigned n_colors, int unsigned height,
                                             int unsigned width);
    return counter_width(height, width) + color_width(n_colors);
  endfunction

  // ---------------------------------------------------------------- bitstream
  // Configuration word width (ICAP data bus width, 32 bits).
  localparam int unsigned CFG_W = 32;

  // Virtex-5 frame address register.
  typedef struct packed {
    logic [7:0] unused;      // bits [31:24], zero
    logic [2:0] block_type;  // CLB/IO, BRAM, ...
    logic       top_bottom;  // 0 = top half, 1 = bottom half
    logic [4:0] row;         // clock-region row, counted from the middle
    logic [7:0] major;       // column, counted from the left per block type
    logic [6:0] minor;       // frame inside the column
  } far_t;

  // Words printed in the relocation example.
  localparam logic [31:0] SYNC_WORD      = 32'hAA99_5566;
  localparam logic [31:0] FAR_WRITE_HDR  = 32'h3000_2001;  // type 1, write, FAR, 1 word

  // Type-1 / type-2 packet header fields (Virtex-5 configuration packets).
  localparam logic [2:0] PKT_TYPE1 = 3'b001;
  localparam logic [2:0] PKT_TYPE2 = 3'b010;
  localparam logic [4:0] REG_FAR   = 5'd1;

  // Relocation request: where the target partition lies relative to the
  // partition the bitstream was generated for.
  typedef struct packed {
    logic       flip_half;   // move between the mirrored top and bottom halves
    logic [4:0] row_offset;  // added modulo 32 to the row field
    logic [7:0] major_offset;// added modulo 256 to the major column field
  } reloc_t;

endpackage
