// Testbench of far_relocator. A partial-bitstream-like word stream is built:
// dummy and bus-width words, the sync word, NOOPs, command and IDCODE writes
// (the words printed in the relocation example), FAR writes, an FDRI frame-data
// packet (type-1 header with zero count, then a type-2 header) whose payload
// contains words equal to a FAR write header and a FAR value, a CRC write,
// DESYNC, and a FAR-write lookalike after DESYNC. Expected output: every word
// unchanged except the FAR values, whose row, major and top/bottom fields are
// recomputed here from the bit positions. First with the printed example
// (row + 1: 0x00101400 -> 0x00109400), then with random relocations.
// Also checked: one word per cycle, one cycle of latency, word and FAR counts.
module tb_far_relocator;
  import csd_pkg::*;

  logic clk = 0, rst_n = 0, in_valid = 0;
  logic [31:0] in_data = '0;
  reloc_t reloc = '0;
  logic out_valid;
  logic [31:0] out_data, word_count;
  logic [15:0] far_count;
  int checks = 0, failures = 0, n_far = 0, n_lookalike = 0;

  always #5 clk = ~clk;

  far_relocator dut (
    .clk(clk), .rst_n(rst_n), .reloc(reloc), .in_valid(in_valid), .in_data(in_data),
    .out_valid(out_valid), .out_data(out_data), .word_count(word_count), .far_count(far_count));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Reference relocation by explicit bit positions:
  // [23:21] type, [20] top/bottom, [19:15] row, [14:7] major, [6:0] minor.
  function automatic logic [31:0] relocated(logic [31:0] w, reloc_t r);
    int unsigned row   = (w >> 15) & 31;
    int unsigned major = (w >> 7) & 255;
    int unsigned tb    = (w >> 20) & 1;
    row   = (row + r.row_offset) % 32;
    major = (major + r.major_offset) % 256;
    tb    = tb ^ r.flip_half;
    return (w & 32'hFF_E0_00_7F & ~32'h0010_0000) | (tb << 20) | (row << 15) | (major << 7);
  endfunction

  logic [31:0] stim[$], expect_q[$];

  task automatic add(logic [31:0] w, logic [31:0] e);
    stim.push_back(w);
    expect_q.push_back(e);
  endtask

  task automatic build(reloc_t r, int far_a, int far_b);
    add(32'hFFFF_FFFF, 32'hFFFF_FFFF);
    add(32'h0000_00BB, 32'h0000_00BB);
    add(32'h1122_0044, 32'h1122_0044);
    add(32'h3000_2001, 32'h3000_2001);        // before sync: not parsed
    add(32'h0010_1400, 32'h0010_1400);
    add(SYNC_WORD, SYNC_WORD);
    add(32'h2000_0000, 32'h2000_0000);        // NOOP
    add(32'h3000_8001, 32'h3000_8001);        // CMD <= RCRC
    add(32'h0000_0007, 32'h0000_0007);
    add(32'h3001_8001, 32'h3001_8001);        // IDCODE
    add(32'h02E9_A093, 32'h02E9_A093);
    add(FAR_WRITE_HDR, FAR_WRITE_HDR);        // FAR write
    add(far_a, relocated(far_a, r)); n_far++;
    add(32'h3000_8001, 32'h3000_8001);        // CMD <= WCFG
    add(32'h0000_0001, 32'h0000_0001);
    add(32'h2000_0000, 32'h2000_0000);
    add(32'h3000_4000, 32'h3000_4000);        // FDRI, count in type 2
    add(32'h5000_0028, 32'h5000_0028);        // type 2, 40 words
    for (int i = 0; i < 40; i++) begin
      logic [31:0] w = (i == 10) ? FAR_WRITE_HDR : (i == 11) ? far_a : $urandom;
      if (i == 10) n_lookalike++;
      add(w, w);
    end
    add(FAR_WRITE_HDR, FAR_WRITE_HDR);        // second FAR write
    add(far_b, relocated(far_b, r)); n_far++;
    add(32'h3000_0001, 32'h3000_0001);        // CRC write: passed unchanged
    add(32'h1234_5678, 32'h1234_5678);
    add(32'h3000_8001, 32'h3000_8001);        // CMD <= DESYNC
    add(32'h0000_000D, 32'h0000_000D);
    add(FAR_WRITE_HDR, FAR_WRITE_HDR);        // after DESYNC: not parsed
    add(far_a, far_a); n_lookalike++;
    add(32'h2000_0000, 32'h2000_0000);
  endtask

  initial begin
    int total = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int run = 0; run < 6; run++) begin
      automatic int sent = 0, got = 0, far_before = 0;
      reloc_t r;
      logic [31:0] fa, fb;
      if (run == 0) begin
        r = '0; r.row_offset = 5'd1;
        fa = 32'h0010_1400; fb = 32'h0010_1400;
      end else begin
        r = reloc_t'($urandom);
        fa = {8'h00, 24'($urandom)}; fb = {8'h00, 24'($urandom)};
      end
      if (run == 0) begin
        checks++;
        if (relocated(32'h0010_1400, r) != 32'h0010_9400) failures++;
      end
      stim.delete(); expect_q.delete();
      n_far = 0;
      build(r, fa, fb);
      reloc = r;
      far_before = far_count;
      // stream one word per cycle; each output is checked in the following cycle
      while (got < stim.size()) begin
        in_valid = (sent < stim.size());
        if (in_valid) in_data = stim[sent];
        @(negedge clk);
        if (in_valid) sent++;
        // output of the word sent one cycle earlier
        checks++;
        if (out_valid !== (got < sent)) failures++;
        if (out_valid) begin
          checks++;
          if (out_data !== expect_q[got]) begin
            failures++;
            if (failures < 8) $display("run %0d word %0d: %h expected %h", run, got,
                                       out_data, expect_q[got]);
          end
          got++;
        end
      end
      in_valid = 0;
      total += stim.size();
      checks += 2;
      if (word_count != 32'(total)) failures++;
      if (far_count - far_before != 16'(n_far)) failures++;
      @(negedge clk);
      // return the parser to its initial state for the next stream
      rst_n = 0; @(negedge clk); rst_n = 1; total = 0;
    end
    $display("FAR values relocated in the last run: %0d, lookalikes passed: %0d", n_far, n_lookalike);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
