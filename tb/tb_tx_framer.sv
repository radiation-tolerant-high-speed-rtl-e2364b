// tb_tx_framer: feeds blocks of 510 payload symbols (a running index) and
// checks the line stream: zero bytes until the first block is ready, then
// packets of exactly 514 bytes back to back, each with sync word 0xF628,
// three copies of the block's level, three copies of the requested level
// and the payload in order; frame_start must mark byte 0 and underflow
// must never occur.
module tb_tx_framer;
  import serial_link_pkg::*;

  localparam int N = 255, BLK = 2 * N, FLEN = BLK + 4;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // asynchronous reset before the first edge
  logic in_valid, in_ready, in_sof, frame_start, underflow;
  sym_t in_data, tx_word;
  prot_e in_prot, req_prot;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  tx_framer dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int idx = 0;
  bit go = 0;
  assign in_valid = go;
  assign in_sof   = (idx % BLK == 0);
  assign in_data  = sym_t'(idx ^ (idx >> 8));
  assign in_prot  = prot_e'((idx / BLK) % 4);
  always @(posedge clk) if (in_valid && in_ready) idx <= idx + 1;

  // line checker
  int pos = -1, pk = 0, pidx = 0;
  always @(posedge clk) begin
    if (rst_n) begin
      sym_t e;
      if (frame_start) begin
        checks++;
        if (pos != -1 && pos != FLEN) begin failures++; $display("packet length %0d", pos); end
        pos = 0;
      end
      if (pos == -1) begin
        checks++;
        if (tx_word != 0) failures++;
      end else begin
        case (pos)
          0: e = 8'hF6;
          1: e = 8'h28;
          2: e = {2'b00, prot_e'(pk % 4), prot_e'(pk % 4), prot_e'(pk % 4)};
          3: e = {2'b00, req_prot, req_prot, req_prot};
          default: begin e = sym_t'(pidx ^ (pidx >> 8)); pidx++; end
        endcase
        checks++;
        if (tx_word != e) begin
          failures++; if (failures < 10) $display("packet %0d byte %0d got %h exp %h", pk, pos, tx_word, e);
        end
        pos++;
        if (pos == FLEN) pk++;
      end
      if (underflow) failures++;
    end
  end

  initial begin
    req_prot = PROT_T4;
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (20) @(negedge clk);
    go = 1;
    wait (pk == 6);
    @(negedge clk);
    checks++;
    if (!frame_start) begin failures++; $display("no back-to-back packet"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
