// Testbench of cut_detector on 32 x 16 frames with 16 colors. Six synthetic
// frames: three of one scene (small jitter between them), then three of
// another, so exactly one cut lies between frames 2 and 3. The threshold is
// set halfway between the largest within-scene distance and the cut distance
// (both from the reference model). Checks per result: distance equal to the
// reference L1 distance, detect_en equal to d > threshold, the CSD of the
// latest frame, and the latency from the frame's last pixel; and that the
// first frame produces no result.
module tb_cut_detector;
  import csd_pkg::*;
  import csd_ref_pkg::*;
  localparam int unsigned N = 16, W = 32, H = 16, NF = 6;
  localparam int unsigned CW = color_width(N), CN = counter_width(H, W);
  localparam int unsigned DW = dist_width(N, H, W);

  logic clk = 0, rst_n = 0, sof = 0, pix_valid = 0;
  logic [CW-1:0] pix = '0;
  logic [DW-1:0] threshold = '0;
  logic [N-1:0][CN-1:0] csd;
  logic dist_valid, detect_en;
  logic [DW-1:0] distance;
  int checks = 0, failures = 0, results = 0, cuts = 0;
  int unsigned imgs [NF][];
  longint unsigned ref_h [NF][];
  longint unsigned ref_d [NF];
  int last_pix_edge [NF];
  int cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle++;

  cut_detector #(.N_COLORS(N), .WIDTH(W), .HEIGHT(H)) dut (
    .clk(clk), .rst_n(rst_n), .sof(sof), .pix_valid(pix_valid), .pix(pix),
    .threshold(threshold), .csd(csd), .dist_valid(dist_valid), .distance(distance),
    .detect_en(detect_en));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // result checker: result k (k >= 1) compares frame k with frame k-1
  always @(negedge clk) if (rst_n && dist_valid) begin
    automatic int k = results + 1;
    results++;
    checks++;
    if (k >= NF) failures++;
    else begin
      checks += 4;
      if (cycle - last_pix_edge[k] != N + 4) begin
        failures++;
        $display("result %0d after %0d edges, expected %0d", k, cycle - last_pix_edge[k], N + 4);
      end
      if (distance !== DW'(ref_d[k])) begin
        failures++;
        $display("frame %0d distance %0d expected %0d", k, distance, ref_d[k]);
      end
      if (detect_en !== (ref_d[k] > threshold)) failures++;
      if (detect_en !== (k == 3)) failures++;
      for (int b = 0; b < N; b++) if (csd[b] !== CN'(ref_h[k][b])) begin
        failures++;
        break;
      end
      if (detect_en) cuts++;
    end
  end

  initial begin
    longint unsigned within_max = 0;
    for (int f = 0; f < NF; f++) begin
      make_frame(W, H, N, (f < 3) ? 4 : 21, f, imgs[f]);
      csd_of(W, H, N, imgs[f], ref_h[f]);
      ref_d[f] = (f == 0) ? 0 : l1_dist(ref_h[f], ref_h[f-1]);
      if (f != 0 && f != 3 && ref_d[f] > within_max) within_max = ref_d[f];
    end
    $display("within-scene max %0d, cut %0d", within_max, ref_d[3]);
    checks++;
    if (ref_d[3] <= within_max) failures++;  // stimulus must contain a clear cut
    threshold = DW'((within_max + ref_d[3]) / 2);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < NF; f++) begin
      for (int p = 0; p < W * H; p++) begin
        pix_valid = 1; sof = (p == 0); pix = CW'(imgs[f][p]);
        @(negedge clk);
      end
      last_pix_edge[f] = cycle;
    end
    pix_valid = 0; sof = 0;
    repeat (N + 20) @(negedge clk);
    checks += 2;
    if (results != NF - 1) begin failures++; $display("results %0d", results); end
    if (cuts != 1) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
