// interleaver: block interleaver of DEPTH Reed-Solomon codewords.
//
// DEPTH consecutive codewords (codeword-major order A0..A254 B0..B254) are
// written into one bank of a two-bank buffer and read out symbol-major
// (A0 B0 A1 B1 ...).  A burst of up to DEPTH*T line symbols then lands as at
// most T errors in each codeword, so with DEPTH = 2 the burst that the code
// corrects is twice as long, which is the doubling the paper attributes to
// its interleaver.  While one bank is read the other is written.
//
// Interface: valid/ready stream in (with the level of the block, sampled at
// its first symbol) and out.  out_sof marks the first symbol of a block and
// out_prot gives its level.  A bank accepts writes only once it has been
// read out completely; reading starts as soon as a bank is full.  The read
// is combinational from the buffer, so a full bank is visible one cycle
// after its last write.
module interleaver
  import serial_link_pkg::*;
#(
  parameter int unsigned N     = RS_N,
  parameter int unsigned DEPTH = ILV_DEPTH
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  output logic  in_ready,
  input  sym_t  in_data,
  input  prot_e in_prot,
  output logic  out_valid,
  input  logic  out_ready,
  output sym_t  out_data,
  output logic  out_sof,
  output prot_e out_prot
);

  localparam int unsigned BLK = N * DEPTH;
  localparam int unsigned AW  = $clog2(BLK);

  sym_t            mem [2][BLK];
  logic [1:0]      full_q;
  prot_e           bprot_q [2];
  logic            wbank_q, rbank_q;
  logic [AW-1:0]   wcnt_q, rcnt_q, raddr;
  logic            wfire, rfire;

  // Symbol m of the output is symbol m/DEPTH of codeword m%DEPTH.
  assign raddr     = AW'((32'(rcnt_q) % DEPTH) * N + 32'(rcnt_q) / DEPTH);
  assign in_ready  = !full_q[wbank_q];
  assign out_valid = full_q[rbank_q];
  assign out_data  = mem[rbank_q][raddr];
  assign out_sof   = (rcnt_q == 0);
  assign out_prot  = bprot_q[rbank_q];
  assign wfire     = in_valid && in_ready;
  assign rfire     = out_valid && out_ready;

  always_ff @(posedge clk) begin
    if (wfire) mem[wbank_q][wcnt_q] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full_q  <= '0;
      wbank_q <= 1'b0;
      rbank_q <= 1'b0;
      wcnt_q  <= '0;
      rcnt_q  <= '0;
      bprot_q <= '{PROT_NONE, PROT_NONE};
    end else begin
      if (wfire) begin
        if (wcnt_q == 0) bprot_q[wbank_q] <= in_prot;
        if (wcnt_q == AW'(BLK - 1)) begin
          wcnt_q           <= '0;
          full_q[wbank_q]  <= 1'b1;
          wbank_q          <= ~wbank_q;
        end else begin
          wcnt_q <= wcnt_q + 1'b1;
        end
      end
      if (rfire) begin
        if (rcnt_q == AW'(BLK - 1)) begin
          rcnt_q          <= '0;
          full_q[rbank_q] <= 1'b0;
          rbank_q         <= ~rbank_q;
        end else begin
          rcnt_q <= rcnt_q + 1'b1;
        end
      end
    end
  end

endmodule
