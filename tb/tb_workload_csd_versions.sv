// Workload testbench: the CSD_8 and CSD_16 versions of the cut detector at the
// full frame size (480-pixel lines, 640 lines), run side by side. Each gets
// four synthetic frames quantized to its own number of colors, two of one
// scene and two of another, so each must report exactly one cut (frame 2)
// and match the reference distances for frames 1..3. (The 32-color version
// at this size is exercised by the top-level testbench.)
module tb_workload_csd_versions;
  import csd_pkg::*;
  import csd_ref_pkg::*;
  localparam int unsigned W = IMG_WIDTH, H = IMG_HEIGHT, NF = 4;

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  initial begin
    repeat (2_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------------------- CSD_8
  localparam int unsigned N8 = 8;
  logic sof8 = 0, pv8 = 0;
  logic [color_width(N8)-1:0] pix8 = '0;
  logic [dist_width(N8, H, W)-1:0] thr8 = '0, dist8;
  logic [N8-1:0][counter_width(H, W)-1:0] csd8;
  logic dv8, det8;
  int res8 = 0, cut8 = 0;
  longint unsigned d8 [NF];

  cut_detector #(.N_COLORS(N8)) u_csd8 (
    .clk(clk), .rst_n(rst_n), .sof(sof8), .pix_valid(pv8), .pix(pix8), .threshold(thr8),
    .csd(csd8), .dist_valid(dv8), .distance(dist8), .detect_en(det8));

  always @(negedge clk) if (rst_n && dv8) begin
    res8++;
    checks += 2;
    if (res8 >= NF || dist8 !== 22'(d8[res8])) failures++;
    if (det8 !== (res8 == 2)) failures++;
    if (det8) cut8++;
    $display("CSD_8  frame %0d: d = %0d, Detect_EN = %0b", res8, dist8, det8);
  end

  // --------------------------------------------------------------- CSD_16
  localparam int unsigned N16 = 16;
  logic sof16 = 0, pv16 = 0;
  logic [color_width(N16)-1:0] pix16 = '0;
  logic [dist_width(N16, H, W)-1:0] thr16 = '0, dist16;
  logic [N16-1:0][counter_width(H, W)-1:0] csd16;
  logic dv16, det16;
  int res16 = 0, cut16 = 0;
  longint unsigned d16 [NF];

  cut_detector #(.N_COLORS(N16)) u_csd16 (
    .clk(clk), .rst_n(rst_n), .sof(sof16), .pix_valid(pv16), .pix(pix16), .threshold(thr16),
    .csd(csd16), .dist_valid(dv16), .distance(dist16), .detect_en(det16));

  always @(negedge clk) if (rst_n && dv16) begin
    res16++;
    checks += 2;
    if (res16 >= NF || dist16 !== 23'(d16[res16])) failures++;
    if (det16 !== (res16 == 2)) failures++;
    if (det16) cut16++;
    $display("CSD_16 frame %0d: d = %0d, Detect_EN = %0b", res16, dist16, det16);
  end

  // reference distances and threshold halfway between within-scene and cut
  task automatic prepare(int unsigned n, output longint unsigned d [NF],
                         output longint unsigned thr);
    int unsigned img[];
    longint unsigned h [NF][];
    longint unsigned w;
    for (int f = 0; f < NF; f++) begin
      make_frame(W, H, n, (f < 2) ? 7 : 30, f, img);
      csd_of(W, H, n, img, h[f]);
      d[f] = (f == 0) ? 0 : l1_dist(h[f], h[f-1]);
    end
    w = (d[1] > d[3]) ? d[1] : d[3];
    checks++;
    if (d[2] <= w) failures++;
    thr = (w + d[2]) / 2;
  endtask

  initial begin
    longint unsigned t8, t16;
    prepare(N8, d8, t8);
    prepare(N16, d16, t16);
    thr8 = 22'(t8);
    thr16 = 23'(t16);
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int f = 0; f < NF; f++) begin
      int unsigned img8[], img16[];
      make_frame(W, H, N8, (f < 2) ? 7 : 30, f, img8);
      make_frame(W, H, N16, (f < 2) ? 7 : 30, f, img16);
      for (int p = 0; p < W * H; p++) begin
        pv8 = 1; sof8 = (p == 0); pix8 = 3'(img8[p]);
        pv16 = 1; sof16 = (p == 0); pix16 = 4'(img16[p]);
        @(negedge clk);
      end
    end
    pv8 = 0; pv16 = 0; sof8 = 0; sof16 = 0;
    repeat (60) @(negedge clk);
    checks += 4;
    if (res8 != NF - 1 || res16 != NF - 1) failures++;
    if (cut8 != 1) failures++;
    if (cut16 != 1) failures++;
    if (csd8 === '0 || csd16 === '0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
