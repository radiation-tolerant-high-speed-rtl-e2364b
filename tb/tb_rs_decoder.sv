// tb_rs_decoder: checks the Reed-Solomon decoder at every protection level.
// Codewords are built by the reference encoder, 0..T random symbol errors
// (distinct positions, data or parity) are added, and the codewords are sent
// back to back.  Every output data symbol must equal the original, cw_nerr
// must equal the number of errors and cw_fail must stay low.  At the
// strongest level T+1..T+4 errors must be reported as uncorrectable.  The
// latency from the last input symbol to the first output is checked against
// NPAR + 5 clock edges for a codeword that finds the decoder idle.
module tb_rs_decoder;
  import serial_link_pkg::*;
  import rs_ref_pkg::*;

  localparam int N = 255;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // asynchronous reset before the first edge
  logic in_valid, in_sof;
  sym_t in_data;
  prot_e in_prot;
  logic out_valid, out_sof, cw_done, cw_fail, overrun;
  sym_t out_data;
  prot_e out_prot;
  logic [4:0] cw_nerr;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  rs_decoder dut (.*);

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // expected results, in order
  byte unsigned exp_data[$];
  int exp_nerr[$];
  bit exp_fail[$];
  prot_e exp_prot[$];
  int ncw_done = 0;
  int cyc = 0, in_cnt = 0, t_last_in = 0, t_first_out = -1;

  // cycle stamps, taken at the clock edge that samples the signals
  always @(posedge clk) begin
    cyc++;
    if (in_valid) begin
      in_cnt = in_sof ? 1 : in_cnt + 1;
      if (in_cnt == N) t_last_in = cyc;
    end
    if (out_valid && out_sof && t_first_out < 0) t_first_out = cyc;
  end

  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      checks++;
      if (exp_data.size() == 0) begin
        failures++; $display("unexpected output");
      end else begin
        byte unsigned e;
        e = exp_data.pop_front();
        // data of an uncorrectable codeword is not checked
        if (!exp_fail[0] && out_data != e) begin
          failures++;
          if (failures < 10) $display("cw %0d data %h exp %h", ncw_done, out_data, e);
        end
      end
      if (out_prot != exp_prot[0]) begin
        failures++; $display("level %0d exp %0d", out_prot, exp_prot[0]);
      end
    end
    if (rst_n && cw_done) begin
      checks++;
      if (exp_fail[0]) begin
        if (!cw_fail) begin failures++; $display("cw %0d: failure not flagged", ncw_done); end
      end else if (cw_fail || int'(cw_nerr) != exp_nerr[0]) begin
        failures++; $display("cw %0d: nerr %0d fail %0d exp %0d", ncw_done, cw_nerr, cw_fail, exp_nerr[0]);
      end
      void'(exp_nerr.pop_front()); void'(exp_fail.pop_front()); void'(exp_prot.pop_front());
      ncw_done++;
    end
    if (rst_n && overrun) begin failures++; $display("overrun"); end
  end

  task automatic send_cw(prot_e p, int nerr, bit expect_fail, bit gap);
    byte unsigned data[], cw[];
    int np, k, pos;
    bit used[N];
    np = int'(npar_of(p));
    k  = N - np;
    data = new[k];
    foreach (data[i]) data[i] = byte'($urandom);
    encode(data, np, N, cw);
    foreach (used[i]) used[i] = 0;
    for (int e = 0; e < nerr; e++) begin
      do pos = $urandom % N; while (used[pos]);
      used[pos] = 1;
      cw[pos] = cw[pos] ^ byte'(1 + $urandom % 255);
    end
    foreach (data[i]) exp_data.push_back(data[i]);
    exp_nerr.push_back(nerr);
    exp_fail.push_back(expect_fail);
    exp_prot.push_back(p);
    for (int i = 0; i < N; i++) begin
      @(negedge clk);
      in_valid = 1; in_sof = (i == 0); in_data = cw[i]; in_prot = p;
    end
    @(negedge clk);
    in_valid = 0; in_sof = 0;
    if (gap) repeat (4) @(negedge clk);
  endtask

  initial begin
    prot_e lv;
    int t, lat;
    in_valid = 0; in_sof = 0; in_data = 0; in_prot = PROT_NONE;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // latency: one isolated codeword per level
    for (int l = 0; l < 4; l++) begin
      lv = prot_e'(l);
      t_first_out = -1;
      send_cw(lv, int'(npar_of(lv)) / 2, 1'b0, 1'b0);
      wait (exp_nerr.size() == 0);
      lat = t_first_out - t_last_in;
      checks++;
      if (lat != int'(npar_of(lv)) + 5) begin
        failures++; $display("level %0d latency %0d exp %0d", l, lat, npar_of(lv) + 5);
      end
      @(negedge clk);
    end
    // throughput: pairs of codewords back to back with a 4-cycle gap (a packet)
    for (int c = 0; c < 120; c++) begin
      lv = prot_e'(c / 2 % 4);
      send_cw(lv, $urandom % (int'(npar_of(lv)) / 2 + 1), 1'b0, (c % 2 == 1));
    end
    // beyond the correction capability at the strongest level
    for (int c = 0; c < 8; c++) send_cw(PROT_T8, 9 + c % 4, 1'b1, 1'b1);
    wait (exp_nerr.size() == 0);
    repeat (5) @(negedge clk);
    checks++;
    if (exp_data.size() != 0) begin failures++; $display("missing outputs"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
