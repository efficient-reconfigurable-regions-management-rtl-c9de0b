// CSD register sets: keep the descriptors of the current and previous frames.
//
// When a frame has been processed (load high for one cycle), the new CSD
// vector is written into register set 1 (frame i) and the vector that set 1
// held moves into register set 2 (frame i-1), as the text describes. prev_valid
// goes high once set 2 holds a real frame, i.e. after the second load; the
// distance calculation waits for it so that the first frame is not compared
// with empty registers (this flag is this design's addition). Registers update
// at the clock edge that samples load.
module csd_register_sets #(
  parameter int unsigned N_COLORS = 32,
  parameter int unsigned CN       = 19
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        load,
  input  logic [N_COLORS-1:0][CN-1:0] csd_in,
  output logic [N_COLORS-1:0][CN-1:0] set1,
  output logic [N_COLORS-1:0][CN-1:0] set2,
  output logic                        prev_valid
);
  logic cur_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      set1       <= '0;
      set2       <= '0;
      cur_valid  <= 1'b0;
      prev_valid <= 1'b0;
    end else if (load) begin
      set1       <= csd_in;
      set2       <= set1;
      cur_valid  <= 1'b1;
      prev_valid <= cur_valid;
    end
  end
endmodule
