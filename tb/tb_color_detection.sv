// Testbench of color_detection with 8 colors: random windows built from a
// random subset of the palette; the expected n-bit presence vector is the set
// of colors found by scanning the 64 pixels.
module tb_color_detection;
  import csd_pkg::*;
  localparam int unsigned N = 8;
  localparam int unsigned CW = 3;

  logic [SW-1:0][SW-1:0][CW-1:0] win;
  logic [N-1:0] present;
  int checks = 0, failures = 0;

  color_detection #(.N_COLORS(N)) dut (.win(win), .present(present));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      automatic logic [N-1:0] exp = '0;
      int unsigned pal[3];
      foreach (pal[k]) pal[k] = $urandom_range(0, N - 1);
      for (int i = 0; i < SW; i++)
        for (int j = 0; j < SW; j++) begin
          win[i][j] = CW'(pal[$urandom_range(0, 2)]);
          exp[win[i][j]] = 1'b1;
        end
      #1;
      checks++;
      if (present !== exp) begin
        failures++;
        if (failures < 5) $display("mismatch t=%0d present=%b expected=%b", t, present, exp);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
