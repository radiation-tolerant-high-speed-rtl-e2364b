// tb_fault_campaign: a fault-injection campaign on two link ends, the kind
// of run used to measure mean time between failures and between losses of
// lock.  Faults of all three kinds are injected together at random times:
//   line errors      single-bit errors on the A->B line, each byte hit with
//                    probability 1/R (R changes with the phase)
//   register upsets  random patterns in one copy at a time of B's triplicated
//                    frame aligner, about every 1500 cycles
//   configuration    single-bit upsets in A's configuration memory model,
//                    about every 4000 cycles
// The adaptive protection runs freely (no override).  Phases:
//   1  R = 1000 from reset (strongest level): every error must be corrected
//   2  clean line: B must lower A's level down to none
//   3  R = 300 while at level none: errors reach the data until the header
//      copy errors and corrections raise the level; the error rate seen by
//      the tester must then fall well below that of the unprotected start
//   4  bit slips of the line (as a clock-data-recovery slip would cause) at
//      random times: each must cause exactly one loss of lock followed by
//      relock, and the data must be clean again after each relock
// Through phases 1-3: no loss of lock (aligner upsets are outvoted and line
// errors are too sparse to hide four sync words in a row), every configuration
// upset repaired, and the B->A direction error free.  The mean number of
// cycles between tester-visible errors and between losses of lock is
// printed per phase.  The controller window (16 codewords, 2 quiet
// windows) and the configuration memory (64 frames) are shortened so that
// the campaign fits in a simulation of about half a million cycles.
module tb_fault_campaign;
  import serial_link_pkg::*;

  localparam int NF = 64, FW = 101;
  logic clk = 0, rst_n = 1;   // pulled low at time 1: an asynchronous reset before any edge

  sym_t a_rx_data, a_gtx_tx, a_gtx_rx, b_rx_data, b_gtx_tx, b_gtx_rx;
  logic a_tx_take, a_rx_valid, a_rx_sof, b_tx_take, b_rx_valid, b_rx_sof;
  logic a_cfg_rd_req, a_cfg_rd_valid, a_cfg_wr_en;
  logic [$clog2(NF)-1:0] a_cfg_rd_frame, a_cfg_wr_frame;
  logic [$clog2(FW)-1:0] a_cfg_wr_word;
  logic [31:0] a_cfg_rd_data, a_cfg_wr_data, a_gold_data;
  logic [$clog2(NF*FW)-1:0] a_gold_addr;
  logic b_cfg_rd_req, b_cfg_rd_valid, b_cfg_wr_en;
  logic [$clog2(NF)-1:0] b_cfg_rd_frame, b_cfg_wr_frame;
  logic [$clog2(FW)-1:0] b_cfg_wr_word;
  logic [31:0] b_cfg_rd_data, b_cfg_wr_data, b_gold_data;
  logic [$clog2(NF*FW)-1:0] b_gold_addr;
  link_status_t a_st, b_st;

  align_t [2:0] b_upset = '0;
  sym_t f_ab = 0;
  logic [2:0] d_ab = 3'd5;
  logic a_upset_en = 0;
  int unsigned a_upset_frame = 0, a_upset_word = 0, a_upset_bit = 0;
  int a_bad, b_bad;
  int unsigned rate = 0;          // 1/rate of the bytes get a bit error; 0: clean line
  bit faults_on = 0;
  int line_errors = 0, reg_upsets = 0, cfg_upsets = 0;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  serial_link_top #(.CTRL_WIN(16), .CTRL_HOLD(2), .NUM_FRAMES(NF), .FRAME_WORDS(FW)) u_a (
    .clk, .rst_n, .tx_data(8'h00), .tx_take(a_tx_take), .rx_valid(a_rx_valid),
    .rx_sof(a_rx_sof), .rx_data(a_rx_data), .use_tester(1'b1),
    .tx_force_en(1'b0), .tx_force_prot(PROT_NONE), .req_force_en(1'b0), .req_force_prot(PROT_NONE),
    .gtx_tx_word(a_gtx_tx), .gtx_rx_word(a_gtx_rx), .aligner_upset('0),
    .scrub_enable(1'b1), .cfg_rd_req(a_cfg_rd_req), .cfg_rd_frame(a_cfg_rd_frame),
    .cfg_rd_valid(a_cfg_rd_valid), .cfg_rd_data(a_cfg_rd_data), .cfg_wr_en(a_cfg_wr_en),
    .cfg_wr_frame(a_cfg_wr_frame), .cfg_wr_word(a_cfg_wr_word), .cfg_wr_data(a_cfg_wr_data),
    .gold_addr(a_gold_addr), .gold_data(a_gold_data), .status(a_st)
  );
  serial_link_top #(.CTRL_WIN(16), .CTRL_HOLD(2), .NUM_FRAMES(NF), .FRAME_WORDS(FW)) u_b (
    .clk, .rst_n, .tx_data(8'h00), .tx_take(b_tx_take), .rx_valid(b_rx_valid),
    .rx_sof(b_rx_sof), .rx_data(b_rx_data), .use_tester(1'b1),
    .tx_force_en(1'b0), .tx_force_prot(PROT_NONE), .req_force_en(1'b0), .req_force_prot(PROT_NONE),
    .gtx_tx_word(b_gtx_tx), .gtx_rx_word(b_gtx_rx), .aligner_upset(b_upset),
    .scrub_enable(1'b1), .cfg_rd_req(b_cfg_rd_req), .cfg_rd_frame(b_cfg_rd_frame),
    .cfg_rd_valid(b_cfg_rd_valid), .cfg_rd_data(b_cfg_rd_data), .cfg_wr_en(b_cfg_wr_en),
    .cfg_wr_frame(b_cfg_wr_frame), .cfg_wr_word(b_cfg_wr_word), .cfg_wr_data(b_cfg_wr_data),
    .gold_addr(b_gold_addr), .gold_data(b_gold_data), .status(b_st)
  );

  serial_channel_model u_ab (.clk, .tx_word(a_gtx_tx), .bit_delay(d_ab), .flip(f_ab), .rx_word(b_gtx_rx));
  serial_channel_model u_ba (.clk, .tx_word(b_gtx_tx), .bit_delay(3'd2), .flip(8'h00), .rx_word(a_gtx_rx));

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

  localparam int WATCHDOG = 900000;
  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // fault injectors, driven at the falling edge
  always @(negedge clk) begin
    f_ab <= 8'h00;
    b_upset <= '0;
    a_upset_en <= 1'b0;
    if (rst_n && rate != 0 && ($urandom % rate) == 0) begin
      f_ab <= sym_t'(8'h01 << ($urandom % 8));
      line_errors++;
    end
    if (faults_on && ($urandom % 1500) == 0) begin
      b_upset[$urandom % 3] <= align_t'({$urandom, $urandom});
      reg_upsets++;
    end
    if (faults_on && ($urandom % 4000) == 0) begin
      a_upset_en    <= 1'b1;
      a_upset_frame <= $urandom % NF;
      a_upset_word  <= $urandom % FW;
      a_upset_bit   <= $urandom % 32;
      cfg_upsets++;
    end
  end

  task automatic expect_that(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wait_packets(int n);
    repeat (n * FRAME_LEN) @(negedge clk);
  endtask

  // tester-visible errors on B and the cycles they span, for one phase
  task automatic report(string phase, int cycles, int errs, int lols);
    $display("%s: %0d cycles, line errors so far %0d, tester errors %0d (%0s), losses of lock %0d, A level %s",
             phase, cycles, line_errors, errs,
             errs == 0 ? "none" : $sformatf("one per %0d cycles", cycles / errs), lols, a_st.tx_prot.name());
  endtask

  initial begin
    int e0, l0, c0, t, e_first, e_last, relock_sum, lol_before_slips;
    #1 rst_n = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    t = 0;
    while (!(a_st.locked && b_st.locked) && t < 10 * FRAME_LEN) begin @(negedge clk); t++; end
    expect_that(a_st.locked && b_st.locked, "both ends lock");
    wait_packets(2);

    // phase 1: sparse line errors at the strongest level
    faults_on = 1;
    rate = 1000;
    e0 = b_st.test_errors; l0 = b_st.lol_count; c0 = b_st.corr_count;
    wait_packets(300);
    expect_that(b_st.corr_count - c0 > 50, "phase 1: line errors corrected");
    expect_that(b_st.fail_count == 0, "phase 1: no uncorrectable codeword");
    expect_that(b_st.test_errors == e0, "phase 1: no error reaches the data");
    report("phase 1 (R=1000)", 300 * FRAME_LEN, b_st.test_errors - e0, b_st.lol_count - l0);

    // phase 2: clean line, the level falls to none
    rate = 0;
    e0 = b_st.test_errors;
    t = 0;
    while (a_st.tx_prot != PROT_NONE && t < 300 * FRAME_LEN) begin @(negedge clk); t++; end
    expect_that(a_st.tx_prot == PROT_NONE, "phase 2: level falls to none on a clean line");
    expect_that(b_st.test_errors == e0, "phase 2: no data errors while the level falls");
    report("phase 2 (clean)", t, b_st.test_errors - e0, 0);
    wait_packets(4);

    // phase 3: denser errors hit the unprotected link; the level must rise
    rate = 300;
    e0 = b_st.test_errors; l0 = b_st.lol_count;
    wait_packets(100);
    e_first = b_st.test_errors - e0;
    t = 0;
    while (a_st.tx_prot < PROT_T4 && t < 500 * FRAME_LEN) begin @(negedge clk); t++; end
    expect_that(a_st.tx_prot >= PROT_T4, "phase 3: level rises under errors");
    wait_packets(20);
    c0 = b_st.test_errors;
    wait_packets(100);
    e_last = b_st.test_errors - c0;
    $display("phase 3: tester errors in the first 100 packets %0d, in 100 packets after the rise %0d",
             e_first, e_last);
    expect_that(e_first > 0, "phase 3: errors reach the data at level none");
    expect_that(e_last * 4 < e_first, "phase 3: raised level cuts the data error rate");
    report("phase 3 (R=300)", (220 * FRAME_LEN) + t, b_st.test_errors - e0, b_st.lol_count - l0);

    // phase 4: line slips; mean time from slip to relock
    rate = 0;
    wait_packets(4);
    l0 = b_st.lol_count;
    relock_sum = 0;
    for (int k = 0; k < 5; k++) begin
      repeat (2000 + $urandom % 20000) @(negedge clk);
      d_ab = d_ab + 3'(1 + $urandom % 7);
      t = 0;
      while (b_st.lol_count == l0 + k && t < 10 * FRAME_LEN) begin @(negedge clk); t++; end
      while (!b_st.locked && t < 20 * FRAME_LEN) begin @(negedge clk); t++; end
      relock_sum += t;
      wait_packets(3);                // descrambler and tester resynchronize
      c0 = b_st.test_errors;
      wait_packets(4);
      expect_that(b_st.test_errors == c0, "phase 4: clean data after relock");
    end
    expect_that(b_st.lol_count - l0 == 5 && b_st.locked, "phase 4: one loss of lock per slip, then relock");
    $display("phase 4: %0d slips, %0d losses of lock, mean %0d cycles from slip to relock",
             5, b_st.lol_count - l0, relock_sum / 5);
    lol_before_slips = l0;

    // end of the campaign: stop injecting, let the scrubber finish its pass
    faults_on = 0;
    rate = 0;
    t = 0;
    while (a_bad != 0 && t < 3 * NF * 2 * FW) begin @(negedge clk); t++; end
    wait_packets(2);
    expect_that(reg_upsets > 100 && cfg_upsets > 20, "faults of every kind were injected");
    expect_that(b_st.tmr_count > 0, "aligner upsets seen as copy disagreements");
    expect_that(lol_before_slips == 0, "no loss of lock from upsets and line errors");
    expect_that(a_bad == 0 && a_st.scrub_repairs > 0, "every configuration upset repaired");
    expect_that(b_st.scrub_repairs == 0 && b_bad == 0, "clean memory never rewritten");
    expect_that(a_st.test_errors == 0 && a_st.fail_count == 0 && a_st.lol_count == 0,
                "B->A direction error free");
    $display("campaign: %0d line errors, %0d aligner upsets, %0d configuration upsets (%0d frames repaired)",
             line_errors, reg_upsets, cfg_upsets, a_st.scrub_repairs);
    $display("B: codewords %0d corrected %0d failed %0d, level changes %0d, tester bytes %0d errors %0d",
             b_st.cw_count, b_st.corr_count, b_st.fail_count, b_st.level_changes,
             b_st.test_bytes, b_st.test_errors);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
