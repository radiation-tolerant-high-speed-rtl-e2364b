// tb_deinterleaver: sends interleaved packets (A0 B0 A1 B1 ...) with 4-cycle
// gaps, plus one packet cut short, and checks that the codewords come out
// whole and in order (A0..A254 then B0..B254) with out_sof and the level,
// and that a codeword streams at one symbol per cycle.
module tb_deinterleaver;
  import serial_link_pkg::*;

  localparam int N = 255, D = 2, BLK = N * D;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // asynchronous reset before the first edge
  logic in_valid, in_sof, out_valid, out_sof, overrun;
  sym_t in_data, out_data;
  prot_e in_prot, out_prot;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  deinterleaver dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected output symbols in order
  byte unsigned exp_q[$];
  prot_e exp_p[$];
  int cnt = 0, run = 0, maxrun = 0;

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (exp_q.size() == 0) begin failures++; end
      else begin
        byte unsigned e;
        e = exp_q.pop_front();
        if (out_data != e || out_prot != exp_p[0]) begin
          failures++; if (failures < 10) $display("out %0d got %h exp %h", cnt, out_data, e);
        end
        void'(exp_p.pop_front());
      end
      checks++;
      if (out_sof != (cnt % N == 0)) failures++;
      cnt++;
      run++;
      if (run > maxrun) maxrun = run;
    end else run = 0;
    if (rst_n && overrun) failures++;
  end

  task automatic send_packet(int pk, bit cut);
    byte unsigned cw[D][N];
    prot_e p;
    p = prot_e'(pk % 4);
    foreach (cw[c, i]) cw[c][i] = byte'($urandom);
    if (!cut)
      for (int c = 0; c < D; c++)
        for (int i = 0; i < N; i++) begin exp_q.push_back(cw[c][i]); exp_p.push_back(p); end
    for (int m = 0; m < (cut ? 100 : BLK); m++) begin
      @(negedge clk);
      in_valid = 1; in_sof = (m == 0); in_data = cw[m % D][m / D]; in_prot = p;
    end
    @(negedge clk);
    in_valid = 0; in_sof = 0;
    repeat (4) @(negedge clk);
  endtask

  initial begin
    in_valid = 0; in_sof = 0; in_data = 0; in_prot = PROT_NONE;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int pk = 0; pk < 8; pk++) send_packet(pk, pk == 3);
    repeat (2 * BLK) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin failures++; $display("%0d symbols missing", exp_q.size()); end
    checks++;
    if (maxrun < BLK) begin failures++; $display("longest run %0d", maxrun); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
