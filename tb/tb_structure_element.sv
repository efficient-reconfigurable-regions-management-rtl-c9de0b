// Testbench of structure_element on small frames (20 x 12, 8 colors): random
// pixels, streamed with random idle cycles, three frames with sof on each first
// pixel. After every pixel the window must equal the 8x8 image block whose
// bottom-right pixel is the one just sent (checked whenever win_valid is high);
// win_valid must be high exactly for the (H-7)*(W-7) positions of Eq. 2, and
// frame_done exactly once per frame, with the last pixel.
module tb_structure_element;
  import csd_pkg::*;
  localparam int unsigned N = 8, CW = 3, W = 20, H = 12;
  localparam int unsigned NP = (H - SW + 1) * (W - SW + 1);

  logic clk = 0, rst_n = 0, sof = 0, pix_valid = 0;
  logic [CW-1:0] pix = '0;
  logic [SW-1:0][SW-1:0][CW-1:0] win;
  logic win_valid, frame_done;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  structure_element #(.N_COLORS(N), .WIDTH(W), .HEIGHT(H)) dut (
    .clk(clk), .rst_n(rst_n), .sof(sof), .pix_valid(pix_valid), .pix(pix), .win(win),
    .win_valid(win_valid), .frame_done(frame_done));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned img [H][W];
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 3; f++) begin
      automatic int n_valid = 0, n_done = 0;
      foreach (img[r, c]) img[r][c] = $urandom_range(0, N - 1);
      for (int r = 0; r < H; r++)
        for (int c = 0; c < W; c++) begin
          bit exp_valid;
          // random idle cycles
          while ($urandom_range(0, 3) == 0) begin
            pix_valid = 0; sof = 0;
            @(negedge clk);
            checks++;
            if (win_valid || frame_done) failures++;
          end
          pix_valid = 1;
          sof = (r == 0 && c == 0);
          pix = CW'(img[r][c]);
          @(negedge clk);
          pix_valid = 0; sof = 0;
          exp_valid = (r >= SW - 1) && (c >= SW - 1);
          checks += 2;
          if (win_valid !== exp_valid) begin
            failures++;
            if (failures < 5) $display("f%0d r%0d c%0d win_valid=%0b", f, r, c, win_valid);
          end
          if (frame_done !== (r == H - 1 && c == W - 1)) failures++;
          if (win_valid) n_valid++;
          if (frame_done) n_done++;
          if (exp_valid) begin
            automatic bit ok = 1;
            for (int i = 0; i < SW; i++)
              for (int j = 0; j < SW; j++)
                // Li-Rj holds image pixel (r-7+i, c-j)
                if (win[i][j] !== CW'(img[r - (SW - 1) + i][c - j])) ok = 0;
            checks++;
            if (!ok) begin
              failures++;
              if (failures < 5) $display("window mismatch f%0d r%0d c%0d", f, r, c);
            end
          end
        end
      checks += 2;
      if (n_valid != NP) begin failures++; $display("positions %0d expected %0d", n_valid, NP); end
      if (n_done != 1) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
