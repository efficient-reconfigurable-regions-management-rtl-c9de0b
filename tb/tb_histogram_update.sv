// Testbench of histogram_update with 8 bins of 19 bits: random presence
// vectors and random inc_en, with an occasional clear; a software copy of the
// bins is updated with the same rule and compared with the RTL every cycle.
module tb_histogram_update;
  localparam int unsigned N = 8;
  localparam int unsigned CN = 19;

  logic clk = 0, rst_n = 0, clr = 0, inc_en = 0;
  logic [N-1:0] present = '0;
  logic [N-1:0][CN-1:0] bin_count;
  int unsigned model [N];
  int checks = 0, failures = 0, n_clr = 0;

  always #5 clk = ~clk;

  histogram_update #(.N_COLORS(N), .CN(CN)) dut (
    .clk(clk), .rst_n(rst_n), .clr(clr), .inc_en(inc_en), .present(present),
    .bin_count(bin_count));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    foreach (model[k]) model[k] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      // check the state reached so far
      for (int k = 0; k < N; k++) begin
        checks++;
        if (bin_count[k] !== CN'(model[k])) begin
          failures++;
          if (failures < 5) $display("t=%0d bin %0d = %0d expected %0d", t, k, bin_count[k], model[k]);
        end
      end
      // next stimulus
      clr     = ($urandom_range(0, 999) == 0);
      inc_en  = $urandom_range(0, 3) != 0;
      present = N'($urandom);
      if (clr) begin
        n_clr++;
        foreach (model[k]) model[k] = 0;
      end else if (inc_en) begin
        foreach (model[k]) if (present[k]) model[k]++;
      end
    end
    $display("clears exercised: %0d", n_clr);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
