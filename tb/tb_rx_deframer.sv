// tb_rx_deframer: drives aligned packets (positions 0..FLEN-1) with random
// levels, one of the three copies of each level corrupted in some packets,
// and checks that the levels are decoded by majority, that payload bytes
// (positions 4 and up) are forwarded one cycle later with out_sof on the
// first and the packet's level, that header bytes are not forwarded, and
// that corrupted copies are reported.
module tb_rx_deframer;
  import serial_link_pkg::*;

  localparam int FLEN = 40;
  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;   // asynchronous reset before the first edge
  sym_t din, out_data;
  logic dvalid, out_valid, out_sof, peer_req_upd, hdr_copy_err;
  logic [POS_W-1:0] dpos;
  prot_e out_prot, peer_req;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;
  rx_deframer dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // previous-cycle inputs and the packet's levels, for the one-cycle latency
  sym_t  pdin;
  logic  pvalid = 0;
  int    ppos;
  prot_e cur_p, cur_q, pkt_p;
  int nerr_exp = 0, nerr_got = 0;

  always @(posedge clk) begin
    if (rst_n) begin
      bit exp_v;
      exp_v = pvalid && ppos >= 4;
      checks++;
      if (out_valid != exp_v) failures++;
      if (exp_v) begin
        checks++;
        if (out_data != pdin || out_sof != (ppos == 4) || out_prot != pkt_p) begin
          failures++; if (failures < 10) $display("pos %0d data %h/%h prot %0d/%0d", ppos, out_data, pdin, out_prot, pkt_p);
        end
      end
      if (peer_req_upd) begin
        checks++;
        if (peer_req != cur_q) begin failures++; $display("req %0d exp %0d", peer_req, cur_q); end
      end
      if (hdr_copy_err) nerr_got++;
      pdin   = din;
      pvalid = dvalid;
      ppos   = int'(dpos);
      if (dvalid && dpos == 2) pkt_p = cur_p;
    end
  end

  initial begin
    dvalid = 0; din = 0; dpos = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int pk = 0; pk < 40; pk++) begin
      cur_p = prot_e'($urandom % 4);
      cur_q = prot_e'($urandom % 4);
      for (int p = 0; p < FLEN; p++) begin
        @(negedge clk);
        dvalid = (pk != 5);          // one packet while unlocked
        dpos   = POS_W'(p);
        case (p)
          0: din = 8'hF6;
          1: din = 8'h28;
          2: din = {2'b00, cur_p, cur_p, cur_p};
          3: din = {2'b00, cur_q, cur_q, cur_q};
          default: din = sym_t'($urandom);
        endcase
        if ((p == 2 || p == 3) && pk % 3 == 1 && dvalid) begin
          // corrupt one copy
          int c;
          c = $urandom % 3;
          din[2*c +: 2] = ~din[2*c +: 2];
          nerr_exp++;
        end
      end
    end
    @(negedge clk);
    dvalid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (nerr_got != nerr_exp) begin failures++; $display("copy errors %0d exp %0d", nerr_got, nerr_exp); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
