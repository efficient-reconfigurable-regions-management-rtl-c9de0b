// Testbench of color_detector: random 8x8 windows of 5-bit colors, with the
// detector bound to color 5. Windows are drawn from a small palette so that
// the color is sometimes present (in a random line and column) and sometimes
// absent; the expected bit is formed by scanning all 64 pixels.
module tb_color_detector;
  import csd_pkg::*;
  localparam int unsigned CW = 5;
  localparam int unsigned COLOR = 5;

  logic [SW-1:0][SW-1:0][CW-1:0] win;
  logic present;
  int checks = 0, failures = 0, n_hit = 0;

  color_detector #(.CW(CW), .COLOR(COLOR)) dut (.win(win), .present(present));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      automatic bit exp = 0;
      for (int i = 0; i < SW; i++)
        for (int j = 0; j < SW; j++) begin
          int unsigned v;
          do v = $urandom_range(0, 31); while (v == COLOR);
          win[i][j] = CW'(v);
        end
      if (t % 2 == 0) win[$urandom_range(0, 7)][$urandom_range(0, 7)] = CW'(COLOR);
      for (int i = 0; i < SW; i++)
        for (int j = 0; j < SW; j++) if (win[i][j] == CW'(COLOR)) exp = 1;
      #1;
      checks++;
      if (exp) n_hit++;
      if (present !== exp) begin
        failures++;
        if (failures < 5) $display("mismatch t=%0d present=%0b expected=%0b", t, present, exp);
      end
    end
    if (n_hit == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
