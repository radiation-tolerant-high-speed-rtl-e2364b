// protection_controller: chooses the Reed-Solomon protection level from the
// error rate that the receiver observes, so that redundancy is only spent
// when the radiation environment calls for it.
//
// The controller watches the receive side in windows of WIN codewords.
//   Step up one level at the end of a window in which a codeword was
//   uncorrectable, lock was lost, a header level copy was corrupted, or one
//   codeword needed more than half of the corrections its level allows.
//   Step down one level after HOLD consecutive windows without any corrected
//   symbol or header error.
// Header copy errors and loss of lock are what reveals line errors at the
// level without parity.  The chosen level is a request to the far end: it is
// sent in the header of this end's packets and applied by the peer's
// transmitter, which is the one that produced the errors observed here.
//
// Interface: per-codeword status from the decoder (cw_done, cw_nerr,
// cw_fail, and rx_prot, the level those codewords were sent with), lol and
// hdr_err pulses, and a manual override (force_en, force_prot) that sets
// the request directly.  `req_prot` is registered; `level_up` and
// `level_down` pulse when it changes.  The paper states that the protection
// level follows the rate of radiation-induced faults but not the rule; the
// windowed rule and its thresholds are this design's.
module protection_controller
  import serial_link_pkg::*;
#(
  parameter int unsigned WIN  = 1024,
  parameter int unsigned HOLD = 4
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       cw_done,
  input  logic [4:0] cw_nerr,
  input  logic       cw_fail,
  input  prot_e      rx_prot,
  input  logic       lol,
  input  logic       hdr_err,
  input  logic       force_en,
  input  prot_e      force_prot,
  output prot_e      req_prot,
  output logic       level_up,
  output logic       level_down
);

  logic [$clog2(WIN+1)-1:0]  wcnt_q;
  logic [$clog2(HOLD+1)-1:0] quiet_q;
  logic                      bad_q, dirty_q;
  logic                      heavy, win_end;

  // A codeword that used more than half of its correction capability T = NPAR/2.
  assign heavy   = cw_done && (int'(cw_nerr) * 4 > int'(npar_of(rx_prot)));
  assign win_end = cw_done && (wcnt_q == $bits(wcnt_q)'(WIN - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wcnt_q     <= '0;
      quiet_q    <= '0;
      bad_q      <= 1'b0;
      dirty_q    <= 1'b0;
      req_prot   <= PROT_T8;
      level_up   <= 1'b0;
      level_down <= 1'b0;
    end else begin
      level_up   <= 1'b0;
      level_down <= 1'b0;
      if (cw_done) wcnt_q <= win_end ? '0 : wcnt_q + 1'b1;
      if (win_end) begin
        bad_q   <= 1'b0;
        dirty_q <= 1'b0;
        if (bad_q || heavy || (cw_done && cw_fail) || lol || hdr_err) begin
          quiet_q <= '0;
          if (req_prot != PROT_T8) begin
            req_prot <= prot_e'(req_prot + 2'd1);
            level_up <= 1'b1;
          end
        end else if (!dirty_q && cw_nerr == '0) begin
          if (quiet_q == $bits(quiet_q)'(HOLD - 1)) begin
            quiet_q <= '0;
            if (req_prot != PROT_NONE) begin
              req_prot   <= prot_e'(req_prot - 2'd1);
              level_down <= 1'b1;
            end
          end else begin
            quiet_q <= quiet_q + 1'b1;
          end
        end else begin
          quiet_q <= '0;
        end
      end else begin
        if ((cw_done && cw_fail) || heavy || lol || hdr_err) bad_q <= 1'b1;
        if (cw_done && cw_nerr != '0) dirty_q <= 1'b1;
      end
      if (force_en) req_prot <= force_prot;
    end
  end

endmodule
