// config_scrubber: read-back scrubber for the FPGA configuration memory.
//
// The scrubber walks through all NUM_FRAMES configuration frames in an
// endless loop.  For each frame it requests a read-back through the
// configuration port, compares every returned word with the same word of
// the golden (reference) copy, and, if any word differs, rewrites the whole
// frame from the golden copy.  Only corrupted frames are written, and the
// device keeps running throughout.
//
// Interface (frame addresses are linear frame numbers):
//   cfg_rd_req/cfg_rd_frame   one-cycle request to read a frame back; the
//                             port answers with FRAME_WORDS words on
//                             cfg_rd_valid/cfg_rd_data, at any pace.
//   cfg_wr_en/_frame/_word/_data  one configuration word written per cycle.
//   gold_addr/gold_data       golden copy, word address frame*FRAME_WORDS+word;
//                             gold_addr is registered and the memory registers
//                             its data, so a word is used two edges after its
//                             address is set.
//   frame_done, repair        pulses per frame scanned and per frame rewritten;
//   scan_count, repair_count  running totals.
// A frame takes about FRAME_WORDS cycles after the port's read latency, and
// FRAME_WORDS+3 more when it is repaired.  The paper's scrubber follows the
// read-back technique of an earlier work that is not described there; this
// is the generic compare-with-golden-copy form, with the vendor's
// configuration-port command protocol left to the port itself.
module config_scrubber #(
  parameter int unsigned NUM_FRAMES  = 28326,
  parameter int unsigned FRAME_WORDS = 101
) (
  input  logic                                       clk,
  input  logic                                       rst_n,
  input  logic                                       enable,
  output logic                                       cfg_rd_req,
  output logic [$clog2(NUM_FRAMES)-1:0]              cfg_rd_frame,
  input  logic                                       cfg_rd_valid,
  input  logic [31:0]                                cfg_rd_data,
  output logic                                       cfg_wr_en,
  output logic [$clog2(NUM_FRAMES)-1:0]              cfg_wr_frame,
  output logic [$clog2(FRAME_WORDS)-1:0]             cfg_wr_word,
  output logic [31:0]                                cfg_wr_data,
  output logic [$clog2(NUM_FRAMES*FRAME_WORDS)-1:0]  gold_addr,
  input  logic [31:0]                                gold_data,
  output logic                                       frame_done,
  output logic                                       repair,
  output logic [31:0]                                scan_count,
  output logic [31:0]                                repair_count
);

  localparam int unsigned FW = $clog2(NUM_FRAMES);
  localparam int unsigned WW = $clog2(FRAME_WORDS);
  localparam int unsigned GW = $clog2(NUM_FRAMES * FRAME_WORDS);

  typedef enum logic [2:0] {S_REQ, S_READ, S_CHECK, S_WRITE, S_NEXT} st_e;

  st_e          st_q;
  logic [FW-1:0] frame_q;
  logic [WW-1:0] word_q;
  logic          cmp_v_q, cmp2_q, bad_q, wr_v_q, wr2_q;
  logic [WW-1:0] wr_word_q, wr_word2_q;
  logic [31:0]   rword_q, rword2_q;
  logic [GW-1:0] base;

  assign base = GW'(frame_q) * GW'(FRAME_WORDS);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q         <= S_REQ;
      frame_q      <= '0;
      word_q       <= '0;
      cmp_v_q      <= 1'b0;
      cmp2_q       <= 1'b0;
      bad_q        <= 1'b0;
      wr_v_q       <= 1'b0;
      wr2_q        <= 1'b0;
      wr_word_q    <= '0;
      wr_word2_q   <= '0;
      rword_q      <= '0;
      rword2_q     <= '0;
      gold_addr    <= '0;
      cfg_rd_req   <= 1'b0;
      cfg_rd_frame <= '0;
      cfg_wr_en    <= 1'b0;
      cfg_wr_frame <= '0;
      cfg_wr_word  <= '0;
      cfg_wr_data  <= '0;
      frame_done   <= 1'b0;
      repair       <= 1'b0;
      scan_count   <= '0;
      repair_count <= '0;
    end else begin
      cfg_rd_req <= 1'b0;
      cfg_wr_en  <= 1'b0;
      frame_done <= 1'b0;
      repair     <= 1'b0;
      cmp_v_q    <= 1'b0;
      wr_v_q     <= 1'b0;

      // The golden word addressed at one edge is on gold_data after the next
      // one: compare and write-back are made two cycles after addressing.
      cmp2_q     <= cmp_v_q;
      rword2_q   <= rword_q;
      wr2_q      <= wr_v_q;
      wr_word2_q <= wr_word_q;
      if (cmp2_q && rword2_q != gold_data) bad_q <= 1'b1;
      if (wr2_q) begin
        cfg_wr_en    <= 1'b1;
        cfg_wr_frame <= frame_q;
        cfg_wr_word  <= wr_word2_q;
        cfg_wr_data  <= gold_data;
      end

      unique case (st_q)
        S_REQ: if (enable) begin
          cfg_rd_req   <= 1'b1;
          cfg_rd_frame <= frame_q;
          word_q       <= '0;
          bad_q        <= 1'b0;
          st_q         <= S_READ;
        end
        S_READ: if (cfg_rd_valid) begin
          rword_q    <= cfg_rd_data;
          gold_addr  <= base + GW'(word_q);
          cmp_v_q    <= 1'b1;
          if (word_q == WW'(FRAME_WORDS - 1)) begin
            word_q <= '0;
            st_q   <= S_CHECK;
          end else begin
            word_q <= word_q + 1'b1;
          end
        end
        S_CHECK: if (!cmp_v_q && !cmp2_q) begin
          // the last comparison has been made
          if (bad_q) st_q <= S_WRITE;
          else       st_q <= S_NEXT;
        end
        S_WRITE: begin
          gold_addr <= base + GW'(word_q);
          wr_v_q    <= 1'b1;
          wr_word_q <= word_q;
          if (word_q == WW'(FRAME_WORDS - 1)) begin
            word_q       <= '0;
            repair       <= 1'b1;
            repair_count <= repair_count + 1'b1;
            st_q         <= S_NEXT;
          end else begin
            word_q <= word_q + 1'b1;
          end
        end
        default: if (!wr_v_q && !wr2_q) begin
          frame_done <= 1'b1;
          scan_count <= scan_count + 1'b1;
          frame_q    <= (frame_q == FW'(NUM_FRAMES - 1)) ? '0 : frame_q + 1'b1;
          st_q       <= S_REQ;
        end
      endcase
    end
  end

endmodule
