// config_memory_model: behavioural stand-in for the FPGA configuration
// memory, its internal access port and the golden copy (simulation only).
//
// Both memories start equal, filled with pseudo-random words.  A frame read
// request is answered, RD_LAT cycles later, with the frame's words, with
// random one-cycle gaps between them.  Word writes update the configuration
// memory.  An upset flips one bit of the configuration memory.  `bad_words`
// counts the words that differ from the golden copy.
module config_memory_model #(
  parameter int unsigned NUM_FRAMES  = 16,
  parameter int unsigned FRAME_WORDS = 101,
  parameter int unsigned RD_LAT      = 4
) (
  input  logic                                      clk,
  input  logic                                      cfg_rd_req,
  input  logic [$clog2(NUM_FRAMES)-1:0]             cfg_rd_frame,
  output logic                                      cfg_rd_valid,
  output logic [31:0]                               cfg_rd_data,
  input  logic                                      cfg_wr_en,
  input  logic [$clog2(NUM_FRAMES)-1:0]             cfg_wr_frame,
  input  logic [$clog2(FRAME_WORDS)-1:0]            cfg_wr_word,
  input  logic [31:0]                               cfg_wr_data,
  input  logic [$clog2(NUM_FRAMES*FRAME_WORDS)-1:0] gold_addr,
  output logic [31:0]                               gold_data,
  input  logic                                      upset_en,
  input  int unsigned                               upset_frame,
  input  int unsigned                               upset_word,
  input  int unsigned                               upset_bit,
  output int                                        bad_words
);
  logic [31:0] cfg  [NUM_FRAMES*FRAME_WORDS];
  logic [31:0] gold [NUM_FRAMES*FRAME_WORDS];
  int rd_frame = -1, rd_word = 0, rd_wait = 0;

  initial begin
    for (int i = 0; i < NUM_FRAMES * FRAME_WORDS; i++) begin
      gold[i] = (i * 32'h9E3779B9) ^ (i >> 3);
      cfg[i]  = gold[i];
    end
    bad_words    = 0;
    cfg_rd_valid = 0;
    cfg_rd_data  = 0;
    gold_data    = 0;
  end

  always @(posedge clk) begin
    int a;
    gold_data    <= gold[gold_addr];
    cfg_rd_valid <= 1'b0;
    if (cfg_rd_req) begin
      rd_frame = int'(cfg_rd_frame);
      rd_word  = 0;
      rd_wait  = RD_LAT;
    end else if (rd_frame >= 0) begin
      if (rd_wait > 0) rd_wait--;
      else if ($urandom % 8 != 0) begin
        cfg_rd_valid <= 1'b1;
        cfg_rd_data  <= cfg[rd_frame * FRAME_WORDS + rd_word];
        rd_word++;
        if (rd_word == FRAME_WORDS) rd_frame = -1;
      end
    end
    if (cfg_wr_en) begin
      a = int'(cfg_wr_frame) * FRAME_WORDS + int'(cfg_wr_word);
      if (cfg[a] != gold[a]) bad_words--;
      cfg[a] = cfg_wr_data;
      if (cfg[a] != gold[a]) bad_words++;
    end
    if (upset_en) begin
      a = upset_frame * FRAME_WORDS + upset_word;
      if (cfg[a] != gold[a]) bad_words--;
      cfg[a][upset_bit] = ~cfg[a][upset_bit];
      if (cfg[a] != gold[a]) bad_words++;
    end
  end
endmodule
