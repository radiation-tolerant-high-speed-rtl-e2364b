// tb_rs_encoder: checks the Reed-Solomon encoder at every protection level.
// Random data is fed with random back-pressure; every output codeword must
// equal the reference encoder's, evaluate to zero at alpha^0..alpha^(NPAR-1),
// take exactly N accepted output cycles, and keep one level for both
// codewords of a block even when the requested level changes in between.
module tb_rs_encoder;
  import serial_link_pkg::*;
  import rs_ref_pkg::*;

  localparam int N = 255;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // asynchronous reset before the first edge
  prot_e prot;
  logic in_valid, in_ready, out_valid, out_ready, out_sof;
  sym_t in_data, out_data;
  prot_e out_prot;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  rs_encoder dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // source: data queue
  byte unsigned src_q[$];
  always_comb begin
    in_valid = src_q.size() > 0;
    in_data  = (src_q.size() > 0) ? src_q[0] : '0;
  end
  always @(posedge clk) if (rst_n && in_valid && in_ready) void'(src_q.pop_front());

  // sink
  byte unsigned got[$];
  prot_e got_prot[$];
  int out_cycles;
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      got.push_back(out_data);
      got_prot.push_back(out_prot);
      if ((got.size() - 1) % N == 0 && !out_sof) begin
        failures++; $display("missing sof");
      end
    end
  end

  initial begin
    byte unsigned data[], cw[];
    automatic prot_e levels[8] = '{PROT_T8, PROT_T8, PROT_T2, PROT_T2, PROT_NONE, PROT_NONE, PROT_T4, PROT_T4};
    byte unsigned all_data[$];
    int k, base;
    longint t0;
    out_ready = 1;
    prot = PROT_T8;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // Queue data for 8 codewords; the level is switched at block boundaries
    // and also once in the middle of a block (must be ignored there).
    for (int c = 0; c < 8; c++) begin
      k = N - int'(npar_of(levels[c]));
      for (int i = 0; i < k; i++) begin
        all_data.push_back(byte'($urandom));
        src_q.push_back(all_data[$]);
      end
    end
    fork
      begin
        // level driver: block c/2 uses levels[c]; a wrong level is shown mid-block
        for (int c = 0; c < 8; c++) begin
          prot = levels[c];
          wait (got.size() >= (c * N) + 1);
          @(posedge clk);
          if (c % 2 == 0) prot = PROT_NONE;   // must not affect the second codeword
          wait (got.size() >= (c + 1) * N);
        end
      end
      begin
        // random back-pressure during the first half, none afterwards
        t0 = 0;
        while (got.size() < 4 * N) begin
          @(negedge clk);
          out_ready = ($urandom % 4) != 0;
        end
        @(negedge clk);
        out_ready = 1;
        t0 = $time;
        wait (got.size() == 8 * N);
        // 4 codewords with no back-pressure: one symbol per cycle
        checks++;
        if (($time - t0) / 10 > 4 * N + 2) begin
          failures++; $display("rate: %0d cycles for 4 codewords", ($time - t0) / 10);
        end
      end
    join
    base = 0;
    for (int c = 0; c < 8; c++) begin
      int np;
      np = int'(npar_of(levels[c]));
      k = N - np;
      data = new[k];
      for (int i = 0; i < k; i++) data[i] = all_data[base + i];
      base += k;
      encode(data, np, N, cw);
      for (int i = 0; i < N; i++) begin
        checks++;
        if (got[c * N + i] != cw[i]) begin
          failures++;
          if (failures < 10) $display("cw %0d sym %0d got %h exp %h", c, i, got[c*N+i], cw[i]);
        end
      end
      for (int i = 0; i < N; i++) cw[i] = got[c * N + i];
      for (int j = 0; j < np; j++) begin
        checks++;
        if (eval_at(cw, j) != 0) failures++;
      end
      checks++;
      if (got_prot[c * N] != levels[c] || got_prot[c * N + N - 1] != levels[c]) begin
        failures++; $display("cw %0d level %0d exp %0d", c, got_prot[c*N], levels[c]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
