// Bitstream relocation filter: rewrites the frame address register (FAR)
// writes of a partial bitstream so that a module generated for one partition
// is configured into another compatible partition.
//
// Relocation as the text describes it: only one partial bitstream is stored
// per module, generated for its initial partition, and at reconfiguration
// time every FAR value in it is changed to address the target location. The
// FAR fields (block type 3 bits, top/bottom 1, row 5, major column 8, minor 7)
// are in csd_pkg::far_t. The target is given as a reloc_t: the row and major
// column fields get an offset added, and the top/bottom bit is inverted when
// the target lies in the other, mirrored half. Block type and minor address
// are kept, since the partitions of one module are built from identical
// resources. With row_offset = 1 the filter turns FAR 0x00101400 into
// 0x00109400, the example printed in the text.
//
// How FAR writes are found is this design's choice: words pass unchanged until
// the sync word 0xAA995566; from there on every word is parsed as a Virtex-5
// packet header (type 1: opcode, register address, word count; type 2: word
// count) or as packet payload. The first payload word of a type-1 write to
// register 1 (FAR), e.g. header 0x30002001, is rewritten; FDRI frame data
// and all other payload pass through, so data that happens to look like a
// header is never touched. A type-1 write of DESYNC (0x0000000D) to the
// command register (address 4) ends the synchronised part.
//
// Not done here: the text names the CRC register as the other item relevant
// to relocation but does not say how its value is updated, so the CRC words
// are passed unchanged.
//
// Timing: one 32-bit word per cycle, no back-pressure (the configuration port
// accepts a word per cycle); out_valid/out_data follow in_valid/in_data one
// cycle later. At 100 MHz that is the 400 KB/ms of Eq. 8.
module far_relocator
  import csd_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  reloc_t           reloc,
  input  logic             in_valid,
  input  logic [CFG_W-1:0] in_data,
  output logic             out_valid,
  output logic [CFG_W-1:0] out_data,
  output logic [31:0]      word_count,
  output logic [15:0]      far_count
);
  typedef enum logic [1:0] {P_UNSYNC, P_HEADER, P_PAYLOAD} pstate_t;

  localparam logic [4:0]  REG_CMD     = 5'd4;
  localparam logic [31:0] CMD_DESYNC  = 32'h0000_000D;
  localparam logic [1:0]  OP_WRITE    = 2'b10;

  pstate_t     pstate;
  logic [26:0] remaining;     // payload words still to come
  logic        first_word;    // next payload word is the first of its packet
  logic [4:0]  pkt_reg;       // register addressed by the current type-1 packet
  logic        pkt_write;

  // ---- relocated FAR value of the current word
  far_t far_in, far_out;
  always_comb begin
    far_in             = far_t'(in_data);
    far_out            = far_in;
    far_out.top_bottom = far_in.top_bottom ^ reloc.flip_half;
    far_out.row        = far_in.row + reloc.row_offset;
    far_out.major      = far_in.major + reloc.major_offset;
  end

  logic is_far_word;
  assign is_far_word = (pstate == P_PAYLOAD) && first_word && pkt_write && (pkt_reg == REG_FAR);

  // ---- packet parser
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pstate     <= P_UNSYNC;
      remaining  <= '0;
      first_word <= 1'b0;
      pkt_reg    <= '0;
      pkt_write  <= 1'b0;
    end else if (in_valid) begin
      unique case (pstate)
        P_UNSYNC: if (in_data == SYNC_WORD) pstate <= P_HEADER;
        P_HEADER: begin
          first_word <= 1'b1;
          if (in_data[31:29] == PKT_TYPE1) begin
            pkt_reg   <= in_data[17:13];
            pkt_write <= (in_data[28:27] == OP_WRITE);
            remaining <= 27'(in_data[10:0]);
            if (in_data[10:0] != '0) pstate <= P_PAYLOAD;
          end else if (in_data[31:29] == PKT_TYPE2) begin
            // type 2 continues the register of the preceding type-1 header
            remaining <= in_data[26:0];
            if (in_data[26:0] != '0) pstate <= P_PAYLOAD;
          end
        end
        P_PAYLOAD: begin
          first_word <= 1'b0;
          remaining  <= remaining - 1'b1;
          if (pkt_write && pkt_reg == REG_CMD && in_data == CMD_DESYNC)
            pstate <= P_UNSYNC;
          else if (remaining == 27'd1)
            pstate <= P_HEADER;
        end
        default: pstate <= P_UNSYNC;
      endcase
    end
  end

  // ---- output register and statistics
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid  <= 1'b0;
      out_data   <= '0;
      word_count <= '0;
      far_count  <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_data   <= is_far_word ? CFG_W'(far_out) : in_data;
        word_count <= word_count + 1'b1;
        if (is_far_word) far_count <= far_count + 1'b1;
      end
    end
  end
endmodule
