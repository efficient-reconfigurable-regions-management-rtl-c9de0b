// End-to-end testbench of dpr_cut_detect_top at its default sizes: 32-color
// cut detector on 480-pixel x 640-line frames, plus the bitstream relocation
// path. Two things run concurrently, as on the device where the static part
// keeps reconfiguring while a module works:
//
// Video: four synthetic frames, two of one scene and two of another. The
// reference CSD of each frame (from the definition) and the L1 distances give
// the expected results; the threshold lies halfway between the within-scene
// distance and the cut distance. Expected: no result for frame 0, results for
// frames 1..3 with the exact distance, detect_en only for frame 2 (the cut).
//
// Configuration: three partial bitstreams with the sizes of the three module
// versions (112, 224 and 336 KB, 1 KB = 1000 bytes as in the 400 KB/ms rate),
// each with two FAR writes (a CLB and a BRAM column), an FDRI data packet whose
// payload contains FAR-write lookalikes, a CRC write and DESYNC. Every output
// word is compared with the expected one (FAR values relocated, the rest
// unchanged), and the streaming time is compared with Eq. 8: at 100 MHz and 32
// bits the three take 0.28, 0.56 and 0.84 ms (Table 6, with adaptation).
//
// Mechanisms counted: first frame without comparison, cut detected, no cut,
// FAR rewritten, lookalike left alone, DESYNC passed; each must occur.
module tb_dpr_cut_detect_top;
  import csd_pkg::*;
  import csd_ref_pkg::*;
  localparam int unsigned N = 32, W = IMG_WIDTH, H = IMG_HEIGHT, NF = 4;
  localparam int unsigned CW = color_width(N), CN = counter_width(H, W);
  localparam int unsigned DW = dist_width(N, H, W);

  logic clk = 0, rst_n = 0, sof = 0, pix_valid = 0;
  logic [CW-1:0] pix = '0;
  logic [DW-1:0] threshold = '0;
  logic [N-1:0][CN-1:0] csd;
  logic dist_valid, detect_en;
  logic [DW-1:0] distance;
  reloc_t reloc = '0;
  logic bs_valid = 0;
  logic [31:0] bs_data = '0;
  logic cfg_valid;
  logic [31:0] cfg_data, cfg_word_count;
  logic [15:0] cfg_far_count;

  int checks = 0, failures = 0;
  int results = 0, n_cut = 0, n_nocut = 0, n_first_skip = 0;
  int n_far = 0, n_lookalike = 0, n_desync = 0;
  longint unsigned ref_h [NF][];
  longint unsigned ref_d [NF];
  logic [31:0] exp_q [$];

  always #5 clk = ~clk;   // 100 MHz

  dpr_cut_detect_top dut (
    .clk(clk), .rst_n(rst_n), .sof(sof), .pix_valid(pix_valid), .pix(pix),
    .threshold(threshold), .csd(csd), .dist_valid(dist_valid), .distance(distance),
    .detect_en(detect_en), .reloc(reloc), .bs_valid(bs_valid), .bs_data(bs_data),
    .cfg_valid(cfg_valid), .cfg_data(cfg_data), .cfg_word_count(cfg_word_count),
    .cfg_far_count(cfg_far_count));

  initial begin
    repeat (3_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ video checks
  always @(negedge clk) if (rst_n && dist_valid) begin
    automatic int k = results + 1;
    results++;
    checks += 3;
    if (k >= NF) failures++;
    else begin
      if (distance !== DW'(ref_d[k])) begin
        failures++;
        $display("frame %0d distance %0d expected %0d", k, distance, ref_d[k]);
      end
      if (detect_en !== (k == 2)) failures++;
      for (int b = 0; b < N; b++) if (csd[b] !== CN'(ref_h[k][b])) begin
        failures++;
        $display("frame %0d bin %0d = %0d expected %0d", k, b, csd[b], ref_h[k][b]);
        break;
      end
      if (detect_en) n_cut++; else n_nocut++;
      $display("frame %0d: d = %0d, threshold %0d, Detect_EN = %0b", k, distance, threshold,
               detect_en);
    end
  end

  // ------------------------------------------------------ configuration checks
  always @(negedge clk) if (rst_n && cfg_valid) begin
    checks++;
    if (exp_q.size() == 0) failures++;
    else begin
      automatic logic [31:0] e = exp_q.pop_front();
      if (cfg_data !== e) begin
        failures++;
        if (failures < 10) $display("config word %h expected %h", cfg_data, e);
      end
    end
  end

  function automatic logic [31:0] relocated(logic [31:0] w, reloc_t r);
    int unsigned row   = ((w >> 15) + r.row_offset) & 31;
    int unsigned major = ((w >> 7) + r.major_offset) & 255;
    int unsigned tb    = ((w >> 20) & 1) ^ r.flip_half;
    return (w & 32'hFFE0_007F & ~32'h0010_0000) | (tb << 20) | (row << 15) | (major << 7);
  endfunction

  task automatic send(logic [31:0] w, logic [31:0] e);
    bs_valid = 1; bs_data = w;
    exp_q.push_back(e);
    @(negedge clk);
  endtask

  // One partial bitstream of 'words' 32-bit words.
  task automatic send_bitstream(int words, reloc_t r);
    logic [31:0] far_clb  = 32'h0010_1400;          // printed example
    logic [31:0] far_bram = 32'h0030_0A00;          // block type 1, same row
    int header = 15, trailer = 8;
    int payload = words - header - trailer;
    reloc = r;
    send(32'hFFFF_FFFF, 32'hFFFF_FFFF);
    send(32'h0000_00BB, 32'h0000_00BB);
    send(32'h1122_0044, 32'h1122_0044);
    send(32'hFFFF_FFFF, 32'hFFFF_FFFF);
    send(SYNC_WORD, SYNC_WORD);
    send(32'h2000_0000, 32'h2000_0000);
    send(32'h3000_8001, 32'h3000_8001);
    send(32'h0000_0007, 32'h0000_0007);
    send(32'h3001_8001, 32'h3001_8001);
    send(32'h02E9_A093, 32'h02E9_A093);
    send(FAR_WRITE_HDR, FAR_WRITE_HDR);
    send(far_clb, relocated(far_clb, r)); n_far++;
    send(32'h3000_8001, 32'h3000_8001);
    send(32'h0000_0001, 32'h0000_0001);
    send(32'h3000_4000, 32'h3000_4000);               // FDRI
    // payload: type-2 header, frame data with one lookalike pair, and the
    // second FAR write after it
    send(32'h5000_0000 | 32'(payload - 4), 32'h5000_0000 | 32'(payload - 4));
    for (int i = 0; i < payload - 4; i++) begin
      automatic logic [31:0] d = (i == 100) ? FAR_WRITE_HDR : (i == 101) ? far_clb : $urandom;
      if (i == 100) n_lookalike++;
      send(d, d);
    end
    send(FAR_WRITE_HDR, FAR_WRITE_HDR);
    send(far_bram, relocated(far_bram, r)); n_far++;
    send(32'h2000_0000, 32'h2000_0000);
    // trailer
    send(32'h3000_0001, 32'h3000_0001);               // CRC, unchanged
    send(32'hC0FF_EE00, 32'hC0FF_EE00);
    send(32'h3000_8001, 32'h3000_8001);
    send(32'h0000_000D, 32'h0000_000D); n_desync++;   // DESYNC
    send(FAR_WRITE_HDR, FAR_WRITE_HDR);               // unsynchronised: untouched
    send(far_clb, far_clb); n_lookalike++;
    send(32'h2000_0000, 32'h2000_0000);
    send(32'h2000_0000, 32'h2000_0000);
    bs_valid = 0;
  endtask

  initial begin
    int unsigned img[];
    longint unsigned within_max;
    for (int f = 0; f < NF; f++) begin
      make_frame(W, H, N, (f < 2) ? 6 : 29, f, img);
      csd_of(W, H, N, img, ref_h[f]);
      ref_d[f] = (f == 0) ? 0 : l1_dist(ref_h[f], ref_h[f-1]);
    end
    within_max = (ref_d[1] > ref_d[3]) ? ref_d[1] : ref_d[3];
    $display("reference distances: %0d %0d %0d", ref_d[1], ref_d[2], ref_d[3]);
    checks++;
    if (ref_d[2] <= within_max) failures++;
    threshold = DW'((within_max + ref_d[2]) / 2);
    repeat (3) @(negedge clk);
    rst_n = 1;
    fork
      begin : video
        for (int f = 0; f < NF; f++) begin
          make_frame(W, H, N, (f < 2) ? 6 : 29, f, img);
          for (int p = 0; p < W * H; p++) begin
            pix_valid = 1; sof = (p == 0); pix = CW'(img[p]);
            @(negedge clk);
            if (f == 1 && p == 0) begin
              // frame 0 is complete and the first comparison is not due yet
              checks++;
              if (results != 0) failures++; else n_first_skip++;
            end
          end
        end
        pix_valid = 0; sof = 0;
        repeat (N + 20) @(negedge clk);
      end
      begin : config_path
        int kb [3] = '{112, 224, 336};
        real ms_paper [3] = '{0.28, 0.56, 0.84};
        for (int v = 0; v < 3; v++) begin
          automatic int words = kb[v] * 1000 / 4;
          automatic int t0 = 0;
          automatic reloc_t r = '0;
          automatic real ms;
          r.row_offset = 5'(v + 1);
          r.major_offset = 8'(4 * v);
          r.flip_half = (v == 2);
          t0 = $time;
          send_bitstream(words, r);
          ms = real'($time - t0) * 1.0e-6;                  // one word per 10 ns cycle
          while (exp_q.size() != 0) @(negedge clk);
          $display("CSD bitstream %0d KB: %0d words, %0.3f ms (paper %0.2f ms)", kb[v], words,
                   ms, ms_paper[v]);
          checks++;
          if (ms > ms_paper[v] + 1e-6 || ms < ms_paper[v] - 1e-6) failures++;
          repeat (20) @(negedge clk);
        end
      end
    join
    checks += 7;
    if (results != NF - 1) begin failures++; $display("results %0d", results); end
    if (n_first_skip == 0) failures++;
    if (n_cut != 1) failures++;
    if (n_nocut == 0) failures++;
    if (int'(cfg_far_count) != n_far || n_far == 0) failures++;
    if (n_lookalike == 0) failures++;
    if (n_desync == 0) failures++;
    $display("mechanisms: first-frame skip %0d, cut %0d, no cut %0d, FAR rewritten %0d, lookalikes %0d, desync %0d",
             n_first_skip, n_cut, n_nocut, n_far, n_lookalike, n_desync);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
