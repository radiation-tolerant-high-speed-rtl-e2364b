// tb_serial_link_full: one complete operation of the link with every
// parameter of serial_link_top at its default: two ends A and B connected
// through channel models, PRBS traffic in both directions at the strongest
// protection level (the level after reset), 30 random line errors and two
// 15-byte bursts on A->B that must all be corrected, and three upsets in the
// first frames of A's full-size configuration memory (28326 frames of 101
// words) that the scrubber must repair.
module tb_serial_link_full;
  import serial_link_pkg::*;

  localparam int NF = 28326, FW = 101;
  logic clk = 0, rst_n = 1;

  sym_t a_rx_data, a_gtx_tx, a_gtx_rx, b_rx_data, b_gtx_tx, b_gtx_rx;
  logic a_tx_take, a_rx_valid, a_rx_sof, b_tx_take, b_rx_valid, b_rx_sof;
  logic a_cfg_rd_req, a_cfg_rd_valid, a_cfg_wr_en;
  logic [$clog2(NF)-1:0] a_cfg_rd_frame, a_cfg_wr_frame;
  logic [$clog2(FW)-1:0] a_cfg_wr_word;
  logic [31:0] a_cfg_rd_data, a_cfg_wr_data, a_gold_data;
  logic [$clog2(NF*FW)-1:0] a_gold_addr;
  logic b_cfg_rd_req, b_cfg_wr_en;
  logic [$clog2(NF)-1:0] b_cfg_rd_frame, b_cfg_wr_frame;
  logic [$clog2(FW)-1:0] b_cfg_wr_word;
  logic [31:0] b_cfg_wr_data;
  logic [$clog2(NF*FW)-1:0] b_gold_addr;
  link_status_t a_st, b_st;
  sym_t f_ab = 0;
  logic a_upset_en = 0;
  int unsigned a_upset_frame = 0, a_upset_word = 0, a_upset_bit = 0;
  int a_bad;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  serial_link_top u_a (
    .clk, .rst_n, .tx_data(8'h00), .tx_take(a_tx_take), .rx_valid(a_rx_valid),
    .rx_sof(a_rx_sof), .rx_data(a_rx_data), .use_tester(1'b1),
    .tx_force_en(1'b0), .tx_force_prot(PROT_NONE), .req_force_en(1'b0), .req_force_prot(PROT_NONE),
    .gtx_tx_word(a_gtx_tx), .gtx_rx_word(a_gtx_rx), .aligner_upset('0),
    .scrub_enable(1'b1), .cfg_rd_req(a_cfg_rd_req), .cfg_rd_frame(a_cfg_rd_frame),
    .cfg_rd_valid(a_cfg_rd_valid), .cfg_rd_data(a_cfg_rd_data), .cfg_wr_en(a_cfg_wr_en),
    .cfg_wr_frame(a_cfg_wr_frame), .cfg_wr_word(a_cfg_wr_word), .cfg_wr_data(a_cfg_wr_data),
    .gold_addr(a_gold_addr), .gold_data(a_gold_data), .status(a_st)
  );
  // B's scrubber is disabled; its configuration port is left unanswered
  serial_link_top u_b (
    .clk, .rst_n, .tx_data(8'h00), .tx_take(b_tx_take), .rx_valid(b_rx_valid),
    .rx_sof(b_rx_sof), .rx_data(b_rx_data), .use_tester(1'b1),
    .tx_force_en(1'b0), .tx_force_prot(PROT_NONE), .req_force_en(1'b0), .req_force_prot(PROT_NONE),
    .gtx_tx_word(b_gtx_tx), .gtx_rx_word(b_gtx_rx), .aligner_upset('0),
    .scrub_enable(1'b0), .cfg_rd_req(b_cfg_rd_req), .cfg_rd_frame(b_cfg_rd_frame),
    .cfg_rd_valid(1'b0), .cfg_rd_data(32'h0), .cfg_wr_en(b_cfg_wr_en),
    .cfg_wr_frame(b_cfg_wr_frame), .cfg_wr_word(b_cfg_wr_word), .cfg_wr_data(b_cfg_wr_data),
    .gold_addr(b_gold_addr), .gold_data(32'h0), .status(b_st)
  );

  serial_channel_model u_ab (.clk, .tx_word(a_gtx_tx), .bit_delay(3'd4), .flip(f_ab), .rx_word(b_gtx_rx));
  serial_channel_model u_ba (.clk, .tx_word(b_gtx_tx), .bit_delay(3'd1), .flip(8'h00), .rx_word(a_gtx_rx));

  config_memory_model #(.NUM_FRAMES(NF), .FRAME_WORDS(FW)) u_mem_a (
    .clk, .cfg_rd_req(a_cfg_rd_req), .cfg_rd_frame(a_cfg_rd_frame), .cfg_rd_valid(a_cfg_rd_valid),
    .cfg_rd_data(a_cfg_rd_data), .cfg_wr_en(a_cfg_wr_en), .cfg_wr_frame(a_cfg_wr_frame),
    .cfg_wr_word(a_cfg_wr_word), .cfg_wr_data(a_cfg_wr_data), .gold_addr(a_gold_addr),
    .gold_data(a_gold_data), .upset_en(a_upset_en), .upset_frame(a_upset_frame),
    .upset_word(a_upset_word), .upset_bit(a_upset_bit), .bad_words(a_bad)
  );

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // position of A's transmitted byte in its packet
  sym_t a_prev = 0;
  int   a_pos = -1;
  always @(negedge clk) begin
    if (a_prev == 8'hF6 && a_gtx_tx == 8'h28) a_pos = 1;
    else if (a_pos >= 0) a_pos = (a_pos + 1) % FRAME_LEN;
    a_prev = a_gtx_tx;
  end

  task automatic expect_that(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    int t;
    #1 rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // configuration upsets in frames 1, 2 and 4
    for (int k = 0; k < 3; k++) begin
      @(negedge clk);
      a_upset_en = 1; a_upset_frame = (k == 2) ? 4 : k + 1; a_upset_word = 17 * k; a_upset_bit = 5 + k;
      @(negedge clk);
      a_upset_en = 0;
    end
    t = 0;
    while (!(a_st.locked && b_st.locked) && t < 10 * FRAME_LEN) begin @(negedge clk); t++; end
    expect_that(a_st.locked && b_st.locked, "both ends lock");
    repeat (2 * FRAME_LEN) @(negedge clk);
    // 30 random line errors, spread so that no codeword gets more than 8
    for (int k = 0; k < 30; k++) begin
      while (!(a_pos >= 10 && a_pos < FRAME_LEN - 10)) @(negedge clk);
      f_ab = sym_t'(1 + $urandom % 255);
      @(negedge clk);
      f_ab = 0;
      repeat (150) @(negedge clk);
    end
    repeat (2 * FRAME_LEN) @(negedge clk);
    // two 15-byte bursts, in packets of their own
    for (int k = 0; k < 2; k++) begin
      while (!(a_pos >= 10 && a_pos < FRAME_LEN - 30)) @(negedge clk);
      repeat (15) begin f_ab = 8'hFF; @(negedge clk); end
      f_ab = 0;
      repeat (2 * FRAME_LEN) @(negedge clk);
    end
    repeat (3 * FRAME_LEN) @(negedge clk);
    expect_that(a_st.tx_prot == PROT_T8 && b_st.tx_prot == PROT_T8, "strongest level after reset");
    expect_that(b_st.corr_count >= 30 + 2 * 15, "line errors corrected");
    expect_that(b_st.fail_count == 0, "no uncorrectable codeword");
    expect_that(b_st.test_errors == 0 && a_st.test_errors == 0, "no data errors");
    expect_that(b_st.test_bytes > 5000 && a_st.test_bytes > 5000, "data flows both ways");
    expect_that(a_bad == 0 && a_st.scrub_repairs == 3, "three configuration frames repaired");
    expect_that(a_st.lol_count == 0 && b_st.lol_count == 0, "no loss of lock");
    $display("B: bytes %0d corrected %0d failed %0d | A: bytes %0d | scrubbed %0d frames, %0d repaired",
             b_st.test_bytes, b_st.corr_count, b_st.fail_count, a_st.test_bytes,
             a_st.scrub_frames, a_st.scrub_repairs);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
