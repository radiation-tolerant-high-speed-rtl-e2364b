// rx_deframer: reads the packet header behind the frame aligner and
// forwards the payload.
//
// Byte 2 of a packet carries the packet's protection level and byte 3 the
// level the peer asks this end to transmit with, each as three copies of a
// 2-bit code; both are decoded by bitwise majority, so one corrupted copy is
// tolerated.  Bytes 4 .. FLEN-1 are the interleaved payload and are passed on
// with the packet's level; the first is marked with out_sof.
//
// Interface: aligned bytes from the frame aligner (din, dvalid, dpos).
// Outputs are registered, one cycle after the input: out_valid, out_sof,
// out_data, out_prot; `peer_req` holds the last requested level (the strongest level until a
// header has been read) and
// `peer_req_upd` pulses when it is read.  `hdr_copy_err` pulses when the three
// copies of a level were not all equal.  The header format is this design's.
module rx_deframer
  import serial_link_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  sym_t             din,
  input  logic             dvalid,
  input  logic [POS_W-1:0] dpos,
  output logic             out_valid,
  output logic             out_sof,
  output sym_t             out_data,
  output prot_e            out_prot,
  output prot_e            peer_req,
  output logic             peer_req_upd,
  output logic             hdr_copy_err
);

  prot_e prot_q;
  logic  copies_differ;

  assign copies_differ = !(din[1:0] == din[3:2] && din[1:0] == din[5:4]);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      prot_q       <= PROT_NONE;
      peer_req     <= PROT_T8;
      peer_req_upd <= 1'b0;
      hdr_copy_err <= 1'b0;
      out_valid    <= 1'b0;
      out_sof      <= 1'b0;
      out_data     <= '0;
      out_prot     <= PROT_NONE;
    end else begin
      peer_req_upd <= 1'b0;
      hdr_copy_err <= 1'b0;
      out_valid    <= dvalid && dpos >= POS_W'(HDR_LEN);
      out_sof      <= dvalid && dpos == POS_W'(HDR_LEN);
      out_data     <= din;
      out_prot     <= prot_q;
      if (dvalid && dpos == POS_W'(2)) begin
        prot_q       <= prot_e'(maj3_2b(din[5:0]));
        hdr_copy_err <= copies_differ;
      end
      if (dvalid && dpos == POS_W'(3)) begin
        peer_req     <= prot_e'(maj3_2b(din[5:0]));
        peer_req_upd <= 1'b1;
        hdr_copy_err <= copies_differ;
      end
    end
  end

endmodule
