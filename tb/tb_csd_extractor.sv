// Testbench of csd_extractor on 24 x 16 frames with 8 colors: four synthetic
// frames (two of one scene, then two of another) streamed back to back without
// gaps; at each csd_valid the histogram must equal the reference CSD computed
// from the definition, and csd_valid must be high in the second cycle after the
// cycle of the frame's last pixel.
module tb_csd_extractor;
  import csd_pkg::*;
  import csd_ref_pkg::*;
  localparam int unsigned N = 8, W = 24, H = 16;
  localparam int unsigned CW = color_width(N), CN = counter_width(H, W);

  logic clk = 0, rst_n = 0, sof = 0, pix_valid = 0;
  logic [CW-1:0] pix = '0;
  logic [N-1:0][CN-1:0] csd;
  logic csd_valid;
  int checks = 0, failures = 0, frames_seen = 0;
  longint unsigned ref_h [4][];
  int last_pix_edge [4];
  int cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  csd_extractor #(.N_COLORS(N), .WIDTH(W), .HEIGHT(H)) dut (
    .clk(clk), .rst_n(rst_n), .sof(sof), .pix_valid(pix_valid), .pix(pix), .csd(csd),
    .csd_valid(csd_valid));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // checker: last pixel sampled at edge X, frame_done after it, csd_valid
  // after edge X+1
  always @(negedge clk) if (rst_n && csd_valid) begin
    checks++;
    if (frames_seen > 3) failures++;
    else begin
      if (cycle - last_pix_edge[frames_seen] != 1) begin
        failures++;
        $display("csd_valid %0d edges after last pixel", cycle - last_pix_edge[frames_seen]);
      end
      for (int k = 0; k < N; k++) begin
        checks++;
        if (csd[k] !== CN'(ref_h[frames_seen][k])) begin
          failures++;
          if (failures < 8)
            $display("frame %0d bin %0d = %0d expected %0d", frames_seen, k, csd[k],
                     ref_h[frames_seen][k]);
        end
      end
    end
    frames_seen++;
  end

  initial begin
    int unsigned img[];
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < 4; f++) begin
      make_frame(W, H, N, (f < 2) ? 3 : 11, f, img);
      csd_of(W, H, N, img, ref_h[f]);
      for (int p = 0; p < W * H; p++) begin
        pix_valid = 1; sof = (p == 0); pix = CW'(img[p]);
        @(negedge clk);
      end
      last_pix_edge[f] = cycle;
    end
    pix_valid = 0; sof = 0;
    repeat (10) @(negedge clk);
    checks++;
    if (frames_seen != 4) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
