// Distance calculation module: Manhattan (L1) distance between the CSDs of two
// consecutive frames, compared with a threshold.
//
// d(F_i, F_i-1) = sum over c of |h_i(c) - h_i-1(c)|. As the text describes,
// the sum is built sequentially with one subtractor, one absolute value, one
// adder and one register: one bin per cycle, bin 0 first. When all N_COLORS
// bins are summed the register is compared with the threshold alpha; if
// d > alpha a cut is reported on detect_en.
//
// Timing: start (one cycle, ignored while busy) clears the accumulator. The
// N_COLORS following cycles each add one bin, one more cycle compares, and
// then done pulses for one cycle with distance and detect_en updated: done is
// high N_COLORS + 2 cycles after the cycle in which start is high. distance and detect_en hold their values
// until the next done. The handshake (start/busy/done) and the held level of
// detect_en are this design's choices.
module distance_calc #(
  parameter int unsigned N_COLORS = 32,
  parameter int unsigned CN       = 19,
  parameter int unsigned DW       = 24
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic [DW-1:0]               threshold,
  input  logic [N_COLORS-1:0][CN-1:0] h_cur,
  input  logic [N_COLORS-1:0][CN-1:0] h_prev,
  output logic                        busy,
  output logic                        done,
  output logic [DW-1:0]               distance,
  output logic                        detect_en
);
  localparam int unsigned IW = (N_COLORS > 1) ? $clog2(N_COLORS) : 1;

  typedef enum logic [1:0] {S_IDLE, S_ACC, S_CMP} state_t;
  state_t        state;
  logic [IW-1:0] idx;
  logic [DW-1:0] acc;          // "Register" of the figure
  logic [CN:0]   diff;         // subtractor, one extra bit for the sign
  logic [CN-1:0] absdiff;      // |.|

  always_comb begin
    diff    = {1'b0, h_cur[idx]} - {1'b0, h_prev[idx]};
    absdiff = diff[CN] ? CN'(-diff) : diff[CN-1:0];
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      idx       <= '0;
      acc       <= '0;
      done      <= 1'b0;
      distance  <= '0;
      detect_en <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          acc   <= '0;
          idx   <= '0;
          state <= S_ACC;
        end
        S_ACC: begin
          acc <= acc + DW'(absdiff);
          if (idx == IW'(N_COLORS - 1)) state <= S_CMP;
          else                          idx   <= idx + 1'b1;
        end
        S_CMP: begin
          distance  <= acc;
          detect_en <= (acc > threshold);
          done      <= 1'b1;
          state     <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
