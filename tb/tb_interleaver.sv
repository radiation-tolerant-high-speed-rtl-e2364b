// tb_interleaver: writes blocks of two codewords (symbol = low 8 bits of a
// running index) with random stalls on both sides and checks that each block
// comes out symbol-major, A0 B0 A1 B1 ..., with its level and out_sof on the
// first symbol; then checks that without stalls a block streams through at
// one symbol per cycle.
module tb_interleaver;
  import serial_link_pkg::*;

  localparam int N = 255, D = 2, BLK = N * D;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // asynchronous reset before the first edge
  logic in_valid, in_ready, out_valid, out_ready, out_sof;
  sym_t in_data, out_data;
  prot_e in_prot, out_prot;
  int checks = 0, failures = 0;
  bit stall = 1;

  always #5 clk = ~clk;
  interleaver dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int wr_n = 0, rd_n = 0, nblk = 6;
  int t_start = 0, t_end = 0, cyc = 0;
  always @(posedge clk) cyc++;

  // writer
  always @(negedge clk) begin
    in_valid <= rst_n && wr_n < nblk * BLK && (!stall || ($urandom % 3 != 0));
    in_data  <= sym_t'(wr_n * 7 + wr_n / BLK);
    in_prot  <= prot_e'((wr_n / BLK) % 4);
    out_ready <= !stall || ($urandom % 4 != 0);
  end
  always @(posedge clk) if (in_valid && in_ready) wr_n++;

  // reader
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      int b, m, src;
      b = rd_n / BLK; m = rd_n % BLK;
      src = b * BLK + (m % D) * N + m / D;
      checks++;
      if (out_data != sym_t'(src * 7 + src / BLK)) begin
        failures++; if (failures < 10) $display("rd %0d got %h exp %h", rd_n, out_data, sym_t'(src*7 + src/BLK));
      end
      checks++;
      if (out_sof != (m == 0) || out_prot != prot_e'(b % 4)) failures++;
      if (b == 4 && m == 0) t_start = cyc;
      if (b == 4 && m == BLK - 1) t_end = cyc;
      rd_n++;
    end
  end

  initial begin
    in_valid = 0; out_ready = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (rd_n == 3 * BLK);
    stall = 0;
    wait (rd_n == nblk * BLK);
    repeat (3) @(posedge clk);
    checks++;
    if (t_end - t_start != BLK - 1) begin
      failures++; $display("block took %0d cycles", t_end - t_start + 1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
