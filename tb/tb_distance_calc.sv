// Testbench of distance_calc with 32 bins of 19 bits: random pairs of
// histograms (including equal ones and ones differing in a single bin), random
// thresholds around the true distance. Checks the L1 distance against a
// software sum, detect_en against d > threshold, and the latency: done must
// come exactly N + 2 cycles after the cycle in which start is high.
module tb_distance_calc;
  localparam int unsigned N = 32;
  localparam int unsigned CN = 19;
  localparam int unsigned DW = 24;

  logic clk = 0, rst_n = 0, start = 0;
  logic [DW-1:0] threshold = '0;
  logic [N-1:0][CN-1:0] h_cur, h_prev;
  logic busy, done, detect_en;
  logic [DW-1:0] distance;
  int checks = 0, failures = 0, n_det = 0, n_nodet = 0;

  always #5 clk = ~clk;

  distance_calc #(.N_COLORS(N), .CN(CN), .DW(DW)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .threshold(threshold), .h_cur(h_cur),
    .h_prev(h_prev), .busy(busy), .done(done), .distance(distance), .detect_en(detect_en));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    h_cur = '0; h_prev = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      automatic longint unsigned d = 0;
      automatic int lat = 0;
      for (int k = 0; k < N; k++) begin
        h_cur[k]  = CN'($urandom_range(0, 299409));
        h_prev[k] = (t % 3 == 0) ? h_cur[k] : CN'($urandom_range(0, 299409));
      end
      if (t % 3 == 0 && t % 2 == 0) h_prev[$urandom_range(0, N - 1)] = CN'($urandom_range(0, 299409));
      for (int k = 0; k < N; k++)
        d += (h_cur[k] > h_prev[k]) ? h_cur[k] - h_prev[k] : h_prev[k] - h_cur[k];
      case ($urandom_range(0, 2))
        0: threshold = DW'(d);            // d > d is false
        1: threshold = (d == 0) ? '0 : DW'(d - 1);
        default: threshold = DW'($urandom_range(0, 1 << 22));
      endcase
      @(negedge clk);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      lat = 1;
      while (!done && lat < 200) begin
        @(negedge clk);
        lat++;
      end
      checks += 3;
      if (lat != N + 2) begin
        failures++;
        $display("latency %0d, expected %0d", lat, N + 2);
      end
      if (distance !== DW'(d)) begin
        failures++;
        if (failures < 5) $display("t=%0d distance %0d expected %0d", t, distance, d);
      end
      if (detect_en !== (d > threshold)) failures++;
      if (detect_en) n_det++; else n_nodet++;
    end
    if (n_det == 0 || n_nodet == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
