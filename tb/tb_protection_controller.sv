// tb_protection_controller: drives codeword reports and checks the level
// rule: start at the strongest level; HOLD error-free windows step down one
// level; a window with an uncorrectable codeword, a loss of lock, a header
// copy error or a codeword using more than half its correction capability
// steps up one level; moderate corrections hold the level; the override
// sets the level directly.
module tb_protection_controller;
  import serial_link_pkg::*;

  localparam int WIN = 8, HOLD = 3;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // asynchronous reset before the first edge
  logic cw_done, cw_fail, lol, hdr_err, force_en, level_up, level_down;
  logic [4:0] cw_nerr;
  prot_e rx_prot, force_prot, req_prot;
  int checks = 0, failures = 0, nup = 0, ndown = 0;

  always #5 clk = ~clk;
  protection_controller #(.WIN(WIN), .HOLD(HOLD)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (level_up) nup++;
    if (level_down) ndown++;
  end

  // one window of WIN codewords; `bad` puts one event in its middle
  task automatic window(int nerr, bit fail, bit lol_ev, bit hdr_ev);
    for (int c = 0; c < WIN; c++) begin
      @(negedge clk);
      cw_done = 1;
      cw_nerr = (c == WIN / 2) ? 5'(nerr) : 5'd0;
      cw_fail = (c == WIN / 2) && fail;
      lol     = (c == 2) && lol_ev;
      hdr_err = (c == 3) && hdr_ev;
      rx_prot = req_prot;
      @(negedge clk);
      cw_done = 0; cw_fail = 0; lol = 0; hdr_err = 0; cw_nerr = 0;
    end
    @(negedge clk);
  endtask

  task automatic expect_level(prot_e p, string what);
    checks++;
    if (req_prot != p) begin failures++; $display("%s: level %0d exp %0d", what, req_prot, p); end
  endtask

  initial begin
    cw_done = 0; cw_fail = 0; lol = 0; hdr_err = 0; cw_nerr = 0; force_en = 0;
    force_prot = PROT_NONE; rx_prot = PROT_T8;
    repeat (3) @(negedge clk);
    rst_n = 1;
    expect_level(PROT_T8, "reset");
    for (int w = 0; w < HOLD - 1; w++) window(0, 0, 0, 0);
    expect_level(PROT_T8, "before hold");
    window(0, 0, 0, 0);
    expect_level(PROT_T4, "after hold");
    for (int w = 0; w < 2 * HOLD; w++) window(0, 0, 0, 0);
    expect_level(PROT_NONE, "quiet");
    window(0, 0, 0, 0);
    expect_level(PROT_NONE, "floor");
    window(0, 0, 0, 1);
    expect_level(PROT_T2, "header error");
    window(2, 0, 0, 0);               // T = 2 here: 2 > T/2, step up
    expect_level(PROT_T4, "heavy correction");
    window(2, 0, 0, 0);               // T = 4: 2 is not more than half, hold
    expect_level(PROT_T4, "moderate correction");
    window(2, 0, 0, 0);               // corrections also reset the quiet count
    window(0, 0, 0, 0);
    window(0, 0, 0, 0);
    expect_level(PROT_T4, "quiet count reset");
    window(0, 1, 0, 0);
    expect_level(PROT_T8, "uncorrectable");
    window(0, 0, 1, 0);
    expect_level(PROT_T8, "ceiling");
    @(negedge clk);
    force_en = 1; force_prot = PROT_T2;
    @(negedge clk);
    force_en = 0;
    expect_level(PROT_T2, "override");
    window(0, 0, 1, 0);
    expect_level(PROT_T4, "loss of lock");
    checks++;
    if (nup != 4 || ndown != 3) begin failures++; $display("ups %0d downs %0d", nup, ndown); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
