// tx_framer: builds the packets sent on the serial line.
//
// A packet is HDR_LEN = 4 header bytes followed by the ILV_DEPTH*N = 510
// interleaved payload symbols:
//   byte 0-1  sync word 0xF628, which the receiver's frame aligner searches for
//   byte 2    {2'b00, p, p, p}: level p of this packet's codewords, three copies
//   byte 3    {2'b00, q, q, q}: level q the sender asks its peer to use on the
//             opposite direction of the bi-directional link, three copies
// Packets follow each other without gaps once the transmit chain has filled
// its first interleaver bank; before that the framer sends zero bytes.
// The header is not Reed-Solomon protected: the sync word only needs to be
// found again by the aligner, and the levels are read by majority vote.
//
// Interface: a ready/valid stream from the interleaver (in_sof marks the first
// payload symbol, in_prot its level) and `req_prot`, the level to request.
// `tx_word` is registered and changes every cycle; `frame_start` is high while
// byte 0 is on `tx_word`.  `underflow` flags a payload symbol that was not
// available in time.  The packet layout is this design's choice: the paper
// says only that the stream is aligned to packet boundaries.
module tx_framer
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
  input  logic  in_sof,
  input  prot_e in_prot,
  input  prot_e req_prot,
  output sym_t  tx_word,
  output logic  frame_start,
  output logic  underflow
);

  localparam int unsigned FLEN = HDR_LEN + DEPTH * N;

  logic              act_q;      // a packet is being sent
  logic [POS_W-1:0]  pos_q;      // byte of the packet sent this cycle
  prot_e             prot_q;
  logic              start;
  sym_t              nxt;

  // A packet starts when the previous one ends and a full block is ready.
  assign start    = (!act_q || pos_q == POS_W'(FLEN - 1)) && in_valid && in_sof;
  assign in_ready = act_q && pos_q >= POS_W'(HDR_LEN - 1) && pos_q != POS_W'(FLEN - 1);

  always_comb begin
    unique case (pos_q)
      POS_W'(0): nxt = SYNC_WORD[7:0];
      POS_W'(1): nxt = {2'b00, prot_q, prot_q, prot_q};
      POS_W'(2): nxt = {2'b00, req_prot, req_prot, req_prot};
      default:   nxt = in_valid ? in_data : '0;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_q       <= 1'b0;
      pos_q       <= '0;
      prot_q      <= PROT_NONE;
      tx_word     <= '0;
      frame_start <= 1'b0;
      underflow   <= 1'b0;
    end else begin
      frame_start <= start;
      underflow   <= in_ready && !in_valid;
      if (start) begin
        act_q   <= 1'b1;
        pos_q   <= '0;
        prot_q  <= in_prot;
        tx_word <= SYNC_WORD[15:8];
      end else if (act_q && pos_q != POS_W'(FLEN - 1)) begin
        pos_q   <= pos_q + 1'b1;
        tx_word <= nxt;
      end else begin
        act_q   <= 1'b0;
        tx_word <= '0;
      end
    end
  end

endmodule
