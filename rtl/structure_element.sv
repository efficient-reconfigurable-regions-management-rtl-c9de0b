// Structure element block: builds the 8x8 structuring element (window) over a
// raster-scan stream of quantized pixels and marks the positions to count.
//
// As in the system figure, the window is an 8x8 array of registers Li-Rj
// (line i = 1..8, register j = 1..8). The input pixel enters L8-R1 and shifts
// towards L8-R8; the value leaving Lk-R8 is pushed into line FIFO k-1, whose
// output enters L(k-1)-R1. With FIFOs of WIDTH-8 entries, line k-1 of the
// window lies exactly one image line above line k. Here win[i-1][j-1] is
// register Li-Rj, so win[7][0] is the newest pixel and win[0][7] the oldest.
//
// Which element positions are counted is this design's choice: the text only
// gives their number, NP = (height-7)*(width-7). A position is valid when the
// newest pixel has row >= 7 and column >= 7, i.e. when the whole window lies
// inside one frame and does not wrap across a line end. A row/column counter
// tracks the pixel position; sof marks the first pixel of a frame and resets
// it (without sof the counter simply wraps at the frame end).
//
// Interface and timing: one pixel per cycle at most, qualified by pix_valid.
// win, win_valid and frame_done are registered: they appear in the cycle after
// the pixel that completes the window. frame_done is a one-cycle pulse that
// coincides with the last valid position of the frame.
module structure_element
  import csd_pkg::*;
#(
  parameter int unsigned N_COLORS = 32,
  parameter int unsigned WIDTH    = IMG_WIDTH,
  parameter int unsigned HEIGHT   = IMG_HEIGHT,
  localparam int unsigned CW      = color_width(N_COLORS)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          sof,
  input  logic                          pix_valid,
  input  logic [CW-1:0]                 pix,
  output logic [SW-1:0][SW-1:0][CW-1:0] win,
  output logic                          win_valid,
  output logic                          frame_done
);
  localparam int unsigned XW = $clog2(WIDTH);
  localparam int unsigned YW = $clog2(HEIGHT);

  // ---- position of the incoming pixel
  logic [XW-1:0] col_q, col;
  logic [YW-1:0] row_q, row;

  always_comb begin
    col = sof ? '0 : col_q;
    row = sof ? '0 : row_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      col_q <= '0;
      row_q <= '0;
    end else if (pix_valid) begin
      if (col == XW'(WIDTH - 1)) begin
        col_q <= '0;
        row_q <= (row == YW'(HEIGHT - 1)) ? '0 : row + 1'b1;
      end else begin
        col_q <= col + 1'b1;
        row_q <= row;
      end
    end else if (sof) begin
      col_q <= '0;
      row_q <= '0;
    end
  end

  // ---- line FIFOs: fifo_out[k] feeds window line k (k = 0..6)
  logic [CW-1:0] fifo_out [SW-1];

  for (genvar k = 0; k < SW - 1; k++) begin : g_fifo
    line_fifo #(.DW(CW), .DEPTH(WIDTH - SW)) u_fifo (
      .clk  (clk),
      .rst_n(rst_n),
      .push (pix_valid),
      .din  (win[k+1][SW-1]),
      .dout (fifo_out[k])
    );
  end

  // ---- 8x8 window registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win <= '0;
    end else if (pix_valid) begin
      win[SW-1][0] <= pix;
      for (int i = 0; i < SW - 1; i++) win[i][0] <= fifo_out[i];
      for (int i = 0; i < SW; i++)
        for (int j = 1; j < SW; j++) win[i][j] <= win[i][j-1];
    end
  end

  // ---- position flags
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      win_valid  <= 1'b0;
      frame_done <= 1'b0;
    end else begin
      win_valid  <= pix_valid && (row >= YW'(SW - 1)) && (col >= XW'(SW - 1));
      frame_done <= pix_valid && (row == YW'(HEIGHT - 1)) && (col == XW'(WIDTH - 1));
    end
  end
endmodule
