// Histogram update block: accumulates the color structure histogram.
//
// It holds n = N_COLORS color bin counters of CN bits. In every cycle in which
// inc_en is high (a valid structuring element position), counter k adds one
// if present[k] is high, so each bin counts the element positions that contain
// its color at least once, whatever the number of such pixels. clr empties
// all bins at once; it is meant for the cycle after the histogram of a frame
// has been taken. Bins are registered and show an increment one cycle later.
module histogram_update #(
  parameter int unsigned N_COLORS = 32,
  parameter int unsigned CN       = 19
) (
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic                         clr,
  input  logic                         inc_en,
  input  logic [N_COLORS-1:0]          present,
  output logic [N_COLORS-1:0][CN-1:0]  bin_count
);
  for (genvar k = 0; k < N_COLORS; k++) begin : g_bin
    bin_counter #(.CN(CN)) u_cnt (
      .clk  (clk),
      .rst_n(rst_n),
      .clr  (clr),
      .inc  (inc_en && present[k]),
      .count(bin_count[k])
    );
  end
endmodule
