// tb_sync_scrambler: checks the scrambler against a bit-serial reference of
// 1 + x^39 + x^58, checks that the descrambler restores the data, and that a
// descrambler started late (wrong history) recovers within 58 bits.
module tb_sync_scrambler;
  import serial_link_pkg::*;

  logic clk = 0, rst_n = 1, rst2_n = 0, en;
  initial #1 rst_n = 0;   // asynchronous reset before the first edge
  sym_t din, scr, dsc, dsc2;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sync_scrambler #(.DESCRAMBLE(1'b0)) u_scr  (.clk, .rst_n, .en, .din, .dout(scr));
  sync_scrambler #(.DESCRAMBLE(1'b1)) u_dsc  (.clk, .rst_n, .en, .din(scr), .dout(dsc));
  sync_scrambler #(.DESCRAMBLE(1'b1)) u_dsc2 (.clk, .rst_n(rst2_n), .en, .din(scr), .dout(dsc2));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit ref_h[58], tmp_h[58];
  initial begin
    byte unsigned exp;
    bit b, s;
    en = 0; din = 0;
    foreach (ref_h[i]) ref_h[i] = 1;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 2000; n++) begin
      @(negedge clk);
      en  = ($urandom % 5) != 0;
      din = sym_t'($urandom);
      if (n == 500) rst2_n = 1;
      #1;
      // reference: ref_h[0] is the most recent scrambled bit
      exp = 0;
      tmp_h = ref_h;
      for (int i = 7; i >= 0; i--) begin
        b = din[i];
        s = b ^ tmp_h[38] ^ tmp_h[57];
        exp[i] = s;
        for (int k = 57; k > 0; k--) tmp_h[k] = tmp_h[k-1];
        tmp_h[0] = s;
      end
      if (en) ref_h = tmp_h;
      checks++;
      if (scr != exp) begin failures++; if (failures < 10) $display("n=%0d scr %h exp %h", n, scr, exp); end
      checks++;
      if (dsc != din) begin failures++; if (failures < 10) $display("n=%0d dsc %h din %h", n, dsc, din); end
      // the late descrambler must agree once 8 enabled bytes (64 bits) have passed
      if (n > 560) begin
        checks++;
        if (dsc2 != din) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
