// frame_aligner: one copy of the packet-boundary finder (used three times by
// frame_aligner_tmr).
//
// The deserializer delivers 8-bit words whose boundaries are not those of
// the transmitted bytes.  The aligner looks at the last 24 received bits for
// the 16-bit sync word at each of the 8 bit offsets (bits are sent most
// significant first).
//   HUNT    the first offset at which the sync word shows fixes the bit
//           offset and the packet position; go to VERIFY.
//   VERIFY  the sync word must reappear at the same offset one packet
//           (FRAME_LEN bytes) later, VERIFY_N times in a row, to reach LOCK;
//           a miss returns to HUNT.
//   LOCK    aligned bytes are valid; MISS_N missed sync words in a row drop
//           back to HUNT and pulse `lol` (loss of lock).
// The register stores the whole state, outputs included.  The next state is
// computed from `state_in`, which in the TMR arrangement is the majority of
// the three copies, so an upset in one copy is corrected at the next edge.
//
// Interface: rx_word every cycle; state_q is this copy's register; `upset`
// is XORed into the register as it is loaded (a test input for upset
// injection, tied to zero in use).  Aligned bytes appear two cycles after the
// word that completes them.  Sync search and the hunt/verify/lock rule are
// this design's choices; the paper says only that the block aligns the
// stream to packet boundaries and is protected by distributed TMR.
module frame_aligner
  import serial_link_pkg::*;
#(
  parameter int unsigned FLEN     = FRAME_LEN,
  parameter int unsigned VERIFY_N = 3,
  parameter int unsigned MISS_N   = 4
) (
  input  logic   clk,
  input  logic   rst_n,
  input  sym_t   rx_word,
  input  align_t state_in,
  input  align_t upset,
  output align_t state_q
);

  align_t      n;
  logic [23:0] win;
  logic [7:0]  match;
  logic [2:0]  first;
  logic        any;
  logic [15:0] pair;

  always_comb begin
    win   = {state_in.hist, rx_word};
    match = '0;
    for (int o = 0; o < 8; o++) match[o] = (win[23-o -: 16] == SYNC_WORD);
    any   = |match;
    first = '0;
    for (int o = 7; o >= 0; o--) if (match[o]) first = 3'(o);

    n      = state_in;
    n.hist = {state_in.hist[7:0], rx_word};
    n.lol  = 1'b0;
    unique case (state_in.st)
      AL_HUNT: begin
        if (any) begin
          n.offset = first;
          n.pos    = POS_W'(1);
          n.cnt    = '0;
          n.st     = AL_VERIFY;
        end
      end
      default: begin
        n.pos = (state_in.pos == POS_W'(FLEN - 1)) ? '0 : state_in.pos + 1'b1;
        if (n.pos == POS_W'(1)) begin
          if (state_in.st == AL_VERIFY) begin
            if (match[state_in.offset]) begin
              if (state_in.cnt == 4'(VERIFY_N - 1)) begin
                n.st  = AL_LOCK;
                n.cnt = '0;
              end else begin
                n.cnt = state_in.cnt + 1'b1;
              end
            end else begin
              n.st = AL_HUNT;
            end
          end else begin
            if (match[state_in.offset]) begin
              n.cnt = '0;
            end else if (state_in.cnt == 4'(MISS_N - 1)) begin
              n.st  = AL_HUNT;
              n.cnt = '0;
              n.lol = 1'b1;
            end else begin
              n.cnt = state_in.cnt + 1'b1;
            end
          end
        end
      end
    endcase

    pair     = {state_in.hist[7:0], rx_word};
    n.dout   = pair[15 - n.offset -: 8];
    n.dpos   = n.pos;
    n.dvalid = (n.st == AL_LOCK);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) state_q <= '0;
    else        state_q <= n ^ upset;
  end

endmodule
