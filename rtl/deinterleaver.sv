// deinterleaver: inverse of the block interleaver at the receiver.
//
// The DEPTH*N payload symbols of a packet arrive symbol-major (A0 B0 A1 B1
// ...); symbol n is written to address (n % DEPTH)*N + n/DEPTH of one bank of
// a two-bank buffer, and a full bank is read out codeword by codeword
// (A0..A254, then B0..B254) at one symbol per cycle.  A burst on the line is
// thereby split over the DEPTH codewords.
//
// Interface: a stream without back-pressure.  in_sof marks the first payload
// symbol of a packet and restarts the write counter, so a packet cut short by
// a loss of lock is dropped rather than merged with the next one.  in_prot is
// the packet's level, sampled with in_sof.  Outputs are registered: out_valid,
// out_data, out_sof (first symbol of each codeword) and out_prot.  Reading a
// bank takes DEPTH*N cycles, fewer than a packet lasts, so a bank is always
// free when the next packet starts; `overrun` flags the case anyway.
module deinterleaver
  import serial_link_pkg::*;
#(
  parameter int unsigned N     = RS_N,
  parameter int unsigned DEPTH = ILV_DEPTH
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  in_valid,
  input  logic  in_sof,
  input  sym_t  in_data,
  input  prot_e in_prot,
  output logic  out_valid,
  output sym_t  out_data,
  output logic  out_sof,
  output prot_e out_prot,
  output logic  overrun
);

  localparam int unsigned BLK = N * DEPTH;
  localparam int unsigned AW  = $clog2(BLK);

  sym_t            mem [2][BLK];
  logic [1:0]      full_q;
  prot_e           bprot_q [2];
  logic            wbank_q, rbank_q, wact_q;
  logic [AW-1:0]   wcnt_q, rcnt_q, wcnt, waddr;
  logic [$clog2(N)-1:0] rpos_q;

  // in_sof restarts the packet being written.
  assign wcnt  = in_sof ? '0 : wcnt_q;
  assign waddr = AW'((32'(wcnt) % DEPTH) * N + 32'(wcnt) / DEPTH);

  always_ff @(posedge clk) begin
    if (in_valid && (in_sof || wact_q)) mem[wbank_q][waddr] <= in_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      full_q    <= '0;
      wbank_q   <= 1'b0;
      rbank_q   <= 1'b0;
      wact_q    <= 1'b0;
      wcnt_q    <= '0;
      rcnt_q    <= '0;
      rpos_q    <= '0;
      bprot_q   <= '{PROT_NONE, PROT_NONE};
      out_valid <= 1'b0;
      out_data  <= '0;
      out_sof   <= 1'b0;
      out_prot  <= PROT_NONE;
      overrun   <= 1'b0;
    end else begin
      overrun <= 1'b0;
      // Write side.
      if (in_valid && (in_sof || wact_q)) begin
        if (in_sof) begin
          bprot_q[wbank_q] <= in_prot;
          if (full_q[wbank_q]) overrun <= 1'b1;
        end
        if (wcnt == AW'(BLK - 1)) begin
          wcnt_q          <= '0;
          wact_q          <= 1'b0;
          full_q[wbank_q] <= 1'b1;
          wbank_q         <= ~wbank_q;
        end else begin
          wcnt_q <= wcnt + 1'b1;
          wact_q <= 1'b1;
        end
      end
      // Read side: codeword-major order.
      out_valid <= full_q[rbank_q];
      out_data  <= mem[rbank_q][rcnt_q];
      out_sof   <= full_q[rbank_q] && (rpos_q == 0);
      out_prot  <= bprot_q[rbank_q];
      if (full_q[rbank_q]) begin
        rpos_q <= (rpos_q == $clog2(N)'(N - 1)) ? '0 : rpos_q + 1'b1;
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
