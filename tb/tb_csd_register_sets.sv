// Testbench of csd_register_sets: a sequence of random CSD vectors is loaded at
// random intervals; after each load set 1 must hold the newest vector and set 2
// the one older, and prev_valid must rise from the second load on.
module tb_csd_register_sets;
  localparam int unsigned N = 16;
  localparam int unsigned CN = 19;

  logic clk = 0, rst_n = 0, load = 0;
  logic [N-1:0][CN-1:0] csd_in, set1, set2, last, older;
  logic prev_valid;
  int checks = 0, failures = 0, loads = 0;

  always #5 clk = ~clk;

  csd_register_sets #(.N_COLORS(N), .CN(CN)) dut (
    .clk(clk), .rst_n(rst_n), .load(load), .csd_in(csd_in), .set1(set1), .set2(set2),
    .prev_valid(prev_valid));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    last = '0; older = '0; csd_in = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      @(negedge clk);
      for (int k = 0; k < N; k++) csd_in[k] = CN'($urandom);
      load = 1'b1;
      @(negedge clk);
      load = 1'b0;
      loads++;
      older = last; last = csd_in;
      csd_in = '1;                       // must be ignored without load
      repeat ($urandom_range(0, 3)) @(negedge clk);
      checks += 3;
      if (set1 !== last)   failures++;
      if (set2 !== older) failures++;
      if (prev_valid !== (loads >= 2)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
