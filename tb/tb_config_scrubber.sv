// tb_config_scrubber: runs the scrubber on a small configuration memory
// model, injects bit upsets into random frames (single and several per
// frame, including the first and last word), and checks that every upset is
// repaired within one pass, that exactly the corrupted frames are rewritten,
// that a clean pass writes nothing, and that a clean frame takes
// FRAME_WORDS cycles plus the read latency and gaps (bounded here).
module tb_config_scrubber;

  localparam int NF = 12, FW = 101;
  logic clk = 0, rst_n = 1, enable;
  initial #1 rst_n = 0;   // asynchronous reset before the first edge
  logic cfg_rd_req, cfg_rd_valid, cfg_wr_en, frame_done, repair;
  logic [$clog2(NF)-1:0] cfg_rd_frame, cfg_wr_frame;
  logic [$clog2(FW)-1:0] cfg_wr_word;
  logic [31:0] cfg_rd_data, cfg_wr_data, gold_data, scan_count, repair_count;
  logic [$clog2(NF*FW)-1:0] gold_addr;
  logic upset_en = 0;
  int unsigned upset_frame = 0, upset_word = 0, upset_bit = 0;
  int bad_words;
  int checks = 0, failures = 0, nwrites = 0;

  always #5 clk = ~clk;

  config_scrubber #(.NUM_FRAMES(NF), .FRAME_WORDS(FW)) dut (.*);
  config_memory_model #(.NUM_FRAMES(NF), .FRAME_WORDS(FW)) u_mem (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && cfg_wr_en) nwrites++;

  task automatic flip(int f, int w, int b);
    @(negedge clk);
    upset_en = 1; upset_frame = f; upset_word = w; upset_bit = b;
    @(negedge clk);
    upset_en = 0;
  endtask

  // wait for one full pass, starting at frame 0
  task automatic one_pass();
    int start;
    start = scan_count;
    while (scan_count < start + NF + 1) @(negedge clk);
  endtask

  initial begin
    int r0, w0, frames_bad;
    longint t0;
    enable = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    enable = 1;
    // clean pass: no writes, bounded frame time
    t0 = $time;
    one_pass();
    checks++;
    if (nwrites != 0 || repair_count != 0) begin failures++; $display("writes on a clean pass"); end
    checks++;
    if (($time - t0) / 10 > 64'(NF + 1) * 64'(FW * 3 / 2 + 20)) begin failures++; $display("pass too slow"); end
    // round 1: single upsets in 3 frames, one at the first and one at the last word
    flip(1, 0, 0);
    flip(6, FW - 1, 31);
    flip(10, 50, 7);
    checks++;
    if (bad_words != 3) failures++;
    r0 = repair_count; w0 = nwrites;
    one_pass();
    checks++;
    if (bad_words != 0) begin failures++; $display("%0d words still bad", bad_words); end
    checks++;
    if (repair_count - r0 != 3 || nwrites - w0 != 3 * FW) begin
      failures++; $display("repairs %0d writes %0d", repair_count - r0, nwrites - w0);
    end
    // round 2: random upsets, several per frame
    frames_bad = 0;
    for (int f = 0; f < NF; f++) begin
      if (($urandom % 2) != 0) begin
        frames_bad++;
        for (int k = 0; k < 1 + $urandom % 4; k++) flip(f, 10 * k + $urandom % 10, $urandom % 32);
      end
    end
    r0 = repair_count;
    one_pass();
    checks++;
    if (bad_words != 0) begin failures++; $display("%0d words still bad", bad_words); end
    checks++;
    if (repair_count - r0 != frames_bad) begin failures++; $display("repairs %0d exp %0d", repair_count - r0, frames_bad); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
