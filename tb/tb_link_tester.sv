// tb_link_tester: checks the PRBS-31 generator against a reference LFSR,
// loops the generated bytes back to the checker through a delay line with
// random gaps and checks that no error is counted, then corrupts single
// bits and checks that each is counted as one to three errored bytes.
module tb_link_tester;
  import serial_link_pkg::*;

  logic clk = 0, rst_n = 1, tx_take, rx_valid, err;
  initial #1 rst_n = 0;   // asynchronous reset before the first edge
  sym_t tx_data, rx_data;
  logic [31:0] rx_count, err_count;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  link_tester dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit [30:0] ref_h = '1;
  byte unsigned loop_q[$];
  bit corrupt = 0;

  always @(posedge clk) begin
    if (rst_n && tx_take) begin
      byte unsigned e;
      bit b;
      for (int i = 7; i >= 0; i--) begin
        b = ref_h[30] ^ ref_h[27];
        e[i] = b;
        ref_h = {ref_h[29:0], b};
      end
      checks++;
      if (tx_data != e) begin failures++; if (failures < 10) $display("gen %h exp %h", tx_data, e); end
      loop_q.push_back(tx_data);
    end
  end

  always @(negedge clk) begin
    rx_valid = 0;
    if (loop_q.size() > 10 && $urandom % 4 != 0) begin
      rx_valid = 1;
      rx_data  = loop_q.pop_front();
      if (corrupt) begin rx_data = rx_data ^ sym_t'(1 << ($urandom % 8)); corrupt = 0; end
    end
  end

  initial begin
    int e0;
    tx_take = 0; rx_valid = 0; rx_data = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    tx_take = 1;
    repeat (2000) @(negedge clk);
    checks++;
    if (err_count != 0 || rx_count < 1000) begin failures++; $display("clean: %0d errors of %0d", err_count, rx_count); end
    for (int k = 0; k < 10; k++) begin
      e0 = err_count;
      corrupt = 1;
      repeat (50) @(negedge clk);
      checks++;
      if (err_count - e0 < 1 || err_count - e0 > 3) begin failures++; $display("one bit gave %0d errored bytes", err_count - e0); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
