// tb_serial_link_top: end-to-end test of two link ends, A and B, connected
// back to back through two channel models (A->B and B->A), each running its
// PRBS tester over the link, with a configuration memory model on A.
// The controller window is shortened (4 codewords, 2 quiet windows) and the
// configuration memory has 16 frames so that every mechanism shows within a
// short run.  The test makes each of these happen and counts it:
//   lock          both receivers align to the peer's packets
//   level down    quiet line: B asks A for weaker protection, down to none
//   header vote   one copy of the level in each header corrupted: data stays
//                 intact and B asks for stronger protection again
//   level up      the header errors raise A's level back to the strongest
//   correction    random symbol errors corrected at the strongest level
//   burst         15-byte bursts, beyond one codeword's 8-symbol capability,
//                 corrected thanks to the interleaving of two codewords
//   uncorrectable a 60-byte burst is reported as uncorrectable
//   TMR upset     upsets in one aligner copy are outvoted: no loss of lock
//   loss of lock  a bit slip on the line causes loss of lock and relock
//   scrubbing     configuration upsets on A are found and repaired
// The testers must see no errored byte except after the uncorrectable burst
// and the slip.
module tb_serial_link_top;
  import serial_link_pkg::*;

  localparam int NF = 16, FW = 101;
  logic clk = 0, rst_n = 1;   // pulled low at time 1: an asynchronous reset before any edge

  // link end A
  sym_t a_tx_data = 0, a_rx_data, a_gtx_tx, a_gtx_rx;
  logic a_tx_take, a_rx_valid, a_rx_sof;
  logic a_cfg_rd_req, a_cfg_rd_valid, a_cfg_wr_en;
  logic [$clog2(NF)-1:0] a_cfg_rd_frame, a_cfg_wr_frame;
  logic [$clog2(FW)-1:0] a_cfg_wr_word;
  logic [31:0] a_cfg_rd_data, a_cfg_wr_data, a_gold_data;
  logic [$clog2(NF*FW)-1:0] a_gold_addr;
  link_status_t a_st;
  // link end B (its scrubber sees a clean memory)
  sym_t b_tx_data = 0, b_rx_data, b_gtx_tx, b_gtx_rx;
  logic b_tx_take, b_rx_valid, b_rx_sof;
  logic b_cfg_rd_req, b_cfg_rd_valid, b_cfg_wr_en;
  logic [$clog2(NF)-1:0] b_cfg_rd_frame, b_cfg_wr_frame;
  logic [$clog2(FW)-1:0] b_cfg_wr_word;
  logic [31:0] b_cfg_rd_data, b_cfg_wr_data, b_gold_data;
  logic [$clog2(NF*FW)-1:0] b_gold_addr;
  link_status_t b_st;

  logic  b_req_force_en = 0;
  prot_e b_req_force = PROT_T8;
  align_t [2:0] b_upset = '0;
  logic [2:0] d_ab = 3'd3, d_ba = 3'd6;
  sym_t f_ab = 0, f_ba = 0;
  logic a_upset_en = 0;
  int unsigned a_upset_frame = 0, a_upset_word = 0, a_upset_bit = 0;
  int a_bad, b_bad;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  serial_link_top #(.CTRL_WIN(4), .CTRL_HOLD(2), .NUM_FRAMES(NF), .FRAME_WORDS(FW)) u_a (
    .clk, .rst_n, .tx_data(a_tx_data), .tx_take(a_tx_take), .rx_valid(a_rx_valid),
    .rx_sof(a_rx_sof), .rx_data(a_rx_data), .use_tester(1'b1),
    .tx_force_en(1'b0), .tx_force_prot(PROT_NONE), .req_force_en(1'b0), .req_force_prot(PROT_NONE),
    .gtx_tx_word(a_gtx_tx), .gtx_rx_word(a_gtx_rx), .aligner_upset('0),
    .scrub_enable(1'b1), .cfg_rd_req(a_cfg_rd_req), .cfg_rd_frame(a_cfg_rd_frame),
    .cfg_rd_valid(a_cfg_rd_valid), .cfg_rd_data(a_cfg_rd_data), .cfg_wr_en(a_cfg_wr_en),
    .cfg_wr_frame(a_cfg_wr_frame), .cfg_wr_word(a_cfg_wr_word), .cfg_wr_data(a_cfg_wr_data),
    .gold_addr(a_gold_addr), .gold_data(a_gold_data), .status(a_st)
  );
  serial_link_top #(.CTRL_WIN(4), .CTRL_HOLD(2), .NUM_FRAMES(NF), .FRAME_WORDS(FW)) u_b (
    .clk, .rst_n, .tx_data(b_tx_data), .tx_take(b_tx_take), .rx_valid(b_rx_valid),
    .rx_sof(b_rx_sof), .rx_data(b_rx_data), .use_tester(1'b1),
    .tx_force_en(1'b0), .tx_force_prot(PROT_NONE), .req_force_en(b_req_force_en), .req_force_prot(b_req_force),
    .gtx_tx_word(b_gtx_tx), .gtx_rx_word(b_gtx_rx), .aligner_upset(b_upset),
    .scrub_enable(1'b1), .cfg_rd_req(b_cfg_rd_req), .cfg_rd_frame(b_cfg_rd_frame),
    .cfg_rd_valid(b_cfg_rd_valid), .cfg_rd_data(b_cfg_rd_data), .cfg_wr_en(b_cfg_wr_en),
    .cfg_wr_frame(b_cfg_wr_frame), .cfg_wr_word(b_cfg_wr_word), .cfg_wr_data(b_cfg_wr_data),
    .gold_addr(b_gold_addr), .gold_data(b_gold_data), .status(b_st)
  );

  serial_channel_model u_ab (.clk, .tx_word(a_gtx_tx), .bit_delay(d_ab), .flip(f_ab), .rx_word(b_gtx_rx));
  serial_channel_model u_ba (.clk, .tx_word(b_gtx_tx), .bit_delay(d_ba), .flip(f_ba), .rx_word(a_gtx_rx));

  config_memory_model #(.NUM_FRAMES(NF), .FRAME_WORDS(FW)) u_mem_a (
    .clk, .cfg_rd_req(a_cfg_rd_req), .cfg_rd_frame(a_cfg_rd_frame), .cfg_rd_valid(a_cfg_rd_valid),
    .cfg_rd_data(a_cfg_rd_data), .cfg_wr_en(a_cfg_wr_en), .cfg_wr_frame(a_cfg_wr_frame),
    .cfg_wr_word(a_cfg_wr_word), .cfg_wr_data(a_cfg_wr_data), .gold_addr(a_gold_addr),
    .gold_data(a_gold_data), .upset_en(a_upset_en), .upset_frame(a_upset_frame),
    .upset_word(a_upset_word), .upset_bit(a_upset_bit), .bad_words(a_bad)
  );
  config_memory_model #(.NUM_FRAMES(NF), .FRAME_WORDS(FW)) u_mem_b (
    .clk, .cfg_rd_req(b_cfg_rd_req), .cfg_rd_frame(b_cfg_rd_frame), .cfg_rd_valid(b_cfg_rd_valid),
    .cfg_rd_data(b_cfg_rd_data), .cfg_wr_en(b_cfg_wr_en), .cfg_wr_frame(b_cfg_wr_frame),
    .cfg_wr_word(b_cfg_wr_word), .cfg_wr_data(b_cfg_wr_data), .gold_addr(b_gold_addr),
    .gold_data(b_gold_data), .upset_en(1'b0), .upset_frame(0),
    .upset_word(0), .upset_bit(0), .bad_words(b_bad)
  );

  localparam int WATCHDOG = 400000;
  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // position of A's transmitted byte in its packet (found from the sync word)
  sym_t a_prev = 0;
  int   a_pos = -1;
  always @(negedge clk) begin
    if (a_prev == 8'hF6 && a_gtx_tx == 8'h28) a_pos = 1;
    else if (a_pos >= 0) a_pos = (a_pos + 1) % FRAME_LEN;
    a_prev = a_gtx_tx;
  end

  // mechanism counters
  int n_lock = 0, n_down = 0, n_up = 0, n_hdr = 0, n_corr = 0, n_burst = 0;
  int n_fail = 0, n_tmr = 0, n_lol = 0, n_scrub = 0;
  prot_e b_req_prev = PROT_T8;
  always @(posedge clk) begin
    if (rst_n) begin
      if (b_st.req_prot < b_req_prev) n_down++;
      if (b_st.req_prot > b_req_prev && !b_req_force_en) n_up++;
      b_req_prev = b_st.req_prot;
    end
  end

  task automatic expect_that(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wait_cycles(int n);
    repeat (n) @(negedge clk);
  endtask

  task automatic wait_level(prot_e p, int limit, string what);
    int t;
    t = 0;
    while (a_st.tx_prot != p && t < limit) begin @(negedge clk); t++; end
    expect_that(a_st.tx_prot == p, what);
  endtask

  // flip one line byte of A->B at a payload position (not the header)
  task automatic flip_payload_byte();
    while (!(a_pos >= 10 && a_pos < FRAME_LEN - 40)) @(negedge clk);
    repeat ($urandom % 20) @(negedge clk);
    f_ab = sym_t'(1 + $urandom % 255);
    @(negedge clk);
    f_ab = 0;
    repeat (150) @(negedge clk);    // at most a few errors per codeword
  endtask

  task automatic burst(int len);
    while (!(a_pos >= 10 && a_pos < FRAME_LEN - len - 10)) @(negedge clk);
    for (int i = 0; i < len; i++) begin
      f_ab = 8'hFF;
      @(negedge clk);
    end
    f_ab = 0;
  endtask

  initial begin
    int e0, c0, f0, l0, t;
    #1 rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;

    // lock
    t = 0;
    while (!(a_st.locked && b_st.locked) && t < 10 * FRAME_LEN) begin @(negedge clk); t++; end
    expect_that(a_st.locked && b_st.locked, "both ends lock");
    if (a_st.locked && b_st.locked) n_lock++;

    // quiet line: protection steps down to none
    wait_level(PROT_NONE, 60 * FRAME_LEN, "level falls to none on a quiet line");
    expect_that(a_st.test_errors == 0 && b_st.test_errors == 0, "no data errors while levels change");
    expect_that(b_st.test_bytes > 1000 && a_st.test_bytes > 1000, "data flows both ways");

    // header copy errors at level none: no data errors, level goes up to T8
    e0 = b_st.test_errors;
    t = 0;
    while (a_st.tx_prot != PROT_T8 && t < 40) begin
      while (a_pos != 2) @(negedge clk);
      f_ab = 8'hFF >> d_ab;           // low bits of the word that ends byte 2: one copy
      n_hdr++;
      @(negedge clk);
      f_ab = 0;
      t++;
    end
    expect_that(a_st.tx_prot == PROT_T8, "header errors raise the level to T8");
    expect_that(b_st.test_errors == e0, "a corrupted header copy loses no data");

    // strongest level pinned: random symbol errors and bursts
    b_req_force_en = 1;
    wait_cycles(4 * FRAME_LEN);
    c0 = b_st.corr_count;
    f0 = b_st.fail_count;
    for (int k = 0; k < 20; k++) flip_payload_byte();
    wait_cycles(3 * FRAME_LEN);
    expect_that(b_st.corr_count - c0 >= 20, "random symbol errors corrected");
    if (b_st.corr_count - c0 >= 20) n_corr++;
    for (int k = 0; k < 6; k++) begin
      c0 = b_st.corr_count;
      burst(15);
      wait_cycles(3 * FRAME_LEN);
      expect_that(b_st.corr_count - c0 > 8, "15-byte burst corrected over two codewords");
      if (b_st.corr_count - c0 > 8) n_burst++;
    end
    expect_that(b_st.fail_count == f0, "no uncorrectable codeword so far");
    expect_that(b_st.test_errors == e0, "corrected errors do not reach the data");

    // uncorrectable burst
    burst(60);
    wait_cycles(3 * FRAME_LEN);
    expect_that(b_st.fail_count > f0, "60-byte burst reported uncorrectable");
    if (b_st.fail_count > f0) n_fail++;
    expect_that(b_st.test_errors > e0, "tester sees the uncorrectable burst");
    b_req_force_en = 0;

    // TMR: upsets in one copy at a time of B's aligner
    l0 = b_st.lol_count;
    e0 = b_st.test_errors;
    wait_cycles(2 * FRAME_LEN);
    e0 = b_st.test_errors;
    for (int k = 0; k < 30; k++) begin
      @(negedge clk);
      b_upset[k % 3] = align_t'({$urandom, $urandom});
      @(negedge clk);
      b_upset = '0;
      wait_cycles(37);
    end
    wait_cycles(3 * FRAME_LEN);
    expect_that(b_st.tmr_count > 0, "aligner copies disagreed");
    expect_that(b_st.lol_count == l0 && b_st.locked, "single-copy upsets do not lose lock");
    expect_that(b_st.test_errors == e0, "single-copy upsets corrupt no data");
    if (b_st.tmr_count > 0 && b_st.lol_count == l0) n_tmr++;

    // bit slip: loss of lock and relock
    d_ab = 3'd0;
    t = 0;
    while (b_st.lol_count == l0 && t < 10 * FRAME_LEN) begin @(negedge clk); t++; end
    expect_that(b_st.lol_count == l0 + 1, "slip causes loss of lock");
    t = 0;
    while (!b_st.locked && t < 10 * FRAME_LEN) begin @(negedge clk); t++; end
    expect_that(b_st.locked, "relock after slip");
    if (b_st.lol_count == l0 + 1 && b_st.locked) n_lol++;
    wait_cycles(3 * FRAME_LEN);       // the descrambler and the tester resynchronize
    e0 = b_st.test_errors;
    wait_cycles(6 * FRAME_LEN);
    expect_that(b_st.test_errors == e0, "clean data after relock");

    // configuration scrubbing on A
    for (int k = 0; k < 5; k++) begin
      @(negedge clk);
      a_upset_en = 1; a_upset_frame = $urandom % NF; a_upset_word = $urandom % FW; a_upset_bit = $urandom % 32;
      @(negedge clk);
      a_upset_en = 0;
    end
    expect_that(a_bad > 0, "configuration upsets injected");
    t = 0;
    while (a_bad != 0 && t < 3 * NF * 2 * FW) begin @(negedge clk); t++; end
    expect_that(a_bad == 0 && a_st.scrub_repairs > 0, "scrubber repairs configuration upsets");
    if (a_bad == 0 && a_st.scrub_repairs > 0) n_scrub++;
    expect_that(b_st.scrub_repairs == 0 && b_bad == 0, "clean memory is not rewritten");
    if (b_st.scrub_repairs != 0 || b_bad != 0) $display("B repairs %0d bad %0d", b_st.scrub_repairs, b_bad);

    // A's receive direction stayed clean throughout
    expect_that(a_st.test_errors == 0 && a_st.fail_count == 0, "B->A direction error free");

    $display("mechanisms: lock=%0d level_down=%0d header_vote=%0d level_up=%0d correction=%0d burst=%0d",
             n_lock, n_down, n_hdr, n_up, n_corr, n_burst);
    $display("            uncorrectable=%0d tmr=%0d loss_of_lock=%0d scrub=%0d",
             n_fail, n_tmr, n_lol, n_scrub);
    expect_that(n_lock > 0, "mechanism lock");
    expect_that(n_down > 0, "mechanism level down");
    expect_that(n_hdr > 0, "mechanism header vote");
    expect_that(n_up > 0, "mechanism level up");
    expect_that(n_corr > 0, "mechanism correction");
    expect_that(n_burst > 0, "mechanism burst");
    expect_that(n_fail > 0, "mechanism uncorrectable");
    expect_that(n_tmr > 0, "mechanism TMR");
    expect_that(n_lol > 0, "mechanism loss of lock");
    expect_that(n_scrub > 0, "mechanism scrubbing");
    $display("A: bytes %0d errors %0d | B: bytes %0d errors %0d corrected %0d failed %0d cw %0d",
             a_st.test_bytes, a_st.test_errors, b_st.test_bytes, b_st.test_errors,
             b_st.corr_count, b_st.fail_count, b_st.cw_count);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
