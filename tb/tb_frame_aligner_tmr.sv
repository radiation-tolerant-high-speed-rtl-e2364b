// tb_frame_aligner_tmr: sends packets (sync word, then random bytes) through
// the channel model with a bit offset and checks that the triplicated
// aligner locks, that every valid output byte and its position equal the
// byte sent a fixed number of cycles earlier, that a single corrupted sync
// word does not lose lock, that upsets injected into any one copy change
// nothing at the outputs (but are seen as a disagreement), and that a bit
// slip causes a loss of lock followed by relock at the new offset.
module tb_frame_aligner_tmr;
  import serial_link_pkg::*;

  localparam int FLEN = 64;          // short packets keep the test quick
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // asynchronous reset before the first edge
  sym_t tx_word, rx_word, flip, dout;
  logic [2:0] bit_delay;
  align_t [2:0] upset;
  logic dvalid, locked, lol, tmr_mismatch;
  logic [POS_W-1:0] dpos;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  serial_channel_model u_ch (.clk, .tx_word, .bit_delay, .flip, .rx_word);
  frame_aligner_tmr #(.FLEN(FLEN)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // transmitter: what was sent in each cycle
  int cyc = 0, tpos = 0;
  sym_t sent_b[int];
  int   sent_p[int];
  always @(negedge clk) begin
    if (tpos == 0)      tx_word = 8'hF6;
    else if (tpos == 1) tx_word = 8'h28;
    else                tx_word = sym_t'($urandom);
    sent_b[cyc] = tx_word;
    sent_p[cyc] = tpos;
    tpos = (tpos + 1) % FLEN;
  end
  always @(posedge clk) cyc <= cyc + 1;

  // output checker: find the latency at each lock, then hold to it
  int lat = -1, nlol = 0, nmm = 0, nlock = 0;
  bit slipping = 0;
  int skip_until = 0; // bytes hit by an injected line error are not checked   // bytes between a slip and the loss of lock are not checked
  logic was_locked = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      if (lol) begin nlol++; lat = -1; slipping = 0; end
      if (tmr_mismatch) nmm++;
      if (locked && !was_locked) nlock++;
      was_locked = locked;
      if (dvalid && !slipping && cyc > skip_until) begin
        if (lat < 0) begin
          for (int l = 1; l <= 4; l++)
            if (sent_b.exists(cyc - l) && sent_b[cyc - l] == dout && sent_p[cyc - l] == int'(dpos)) lat = l;
        end
        checks++;
        if (lat < 0 || sent_b[cyc - lat] != dout || sent_p[cyc - lat] != int'(dpos)) begin
          failures++;
          if (failures < 10) $display("cyc %0d: dout %h pos %0d lat %0d", cyc, dout, dpos, lat);
        end
      end
    end
  end

  initial begin
    int t;
    flip = 0; bit_delay = 3'd5; upset = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // lock within four packets of the first sync word
    t = 0;
    while (!locked && t < 6 * FLEN) begin @(negedge clk); t++; end
    checks++;
    if (!locked || t > 4 * FLEN + 4) begin failures++; $display("lock took %0d cycles", t); end
    repeat (3 * FLEN) @(negedge clk);
    // one corrupted sync word: lock must hold
    wait (tpos == 1);
    @(negedge clk); @(negedge clk);
    flip = 8'h10;
    skip_until = cyc + 6;
    @(negedge clk);
    flip = 0;
    repeat (3 * FLEN) @(negedge clk);
    checks++;
    if (!locked || nlol != 0) begin failures++; $display("lock lost on one bad sync word"); end
    // upsets in one copy at a time, random bits
    for (int k = 0; k < 60; k++) begin
      @(negedge clk);
      upset[k % 3] = align_t'({$urandom, $urandom});
      @(negedge clk);
      upset = '0;
      repeat ($urandom % 20) @(negedge clk);
    end
    repeat (2 * FLEN) @(negedge clk);
    checks++;
    if (nmm == 0 || !locked || nlol != 0) begin
      failures++; $display("upsets: mismatches %0d locked %0d lol %0d", nmm, locked, nlol);
    end
    // bit slip: must lose lock and relock
    bit_delay = 3'd2;
    slipping  = 1;
    t = 0;
    while (nlol == 0 && t < 8 * FLEN) begin @(negedge clk); t++; end
    checks++;
    if (nlol != 1) begin failures++; $display("no loss of lock after slip"); end
    t = 0;
    while (!locked && t < 6 * FLEN) begin @(negedge clk); t++; end
    checks++;
    if (!locked) begin failures++; $display("no relock"); end
    repeat (3 * FLEN) @(negedge clk);
    checks++;
    if (nlock != 2) begin failures++; $display("locks %0d", nlock); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
