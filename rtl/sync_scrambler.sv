// sync_scrambler: self-synchronizing (multiplicative) scrambler and descrambler.
//
// Each byte is processed bit by bit, bit 7 first, through a 58-bit history
// with the polynomial 1 + x^39 + x^58 (the one used by 64b/66b Ethernet).
// Scrambler:   s = d ^ h[38] ^ h[57], and the scrambled bit s enters h.
// Descrambler: d = s ^ h[38] ^ h[57], and the received bit s enters h.
// Because the descrambler's history is built from the received bits, it
// locks by itself after 58 bits, with no reset or seed shared between the
// two ends; a line error reappears three times in the output (at 0, 39 and
// 58 bits).  The scrambler randomizes the data ahead of the Reed-Solomon
// encoder, as in the paper; the polynomial is this design's choice.
//
// Interface: when `en` is high, `din` is transformed and the history
// advances at the clock edge.  `dout` is combinational from `din` and the
// history, so the block adds no latency.
module sync_scrambler
  import serial_link_pkg::*;
#(
  parameter bit DESCRAMBLE = 1'b0
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  sym_t din,
  output sym_t dout
);

  logic [57:0] hist_q, hist_d;

  always_comb begin
    logic [57:0] h;
    logic        s;
    h    = hist_q;
    dout = '0;
    for (int i = SYM_W - 1; i >= 0; i--) begin
      s       = din[i] ^ h[38] ^ h[57];
      dout[i] = s;
      h       = {h[56:0], DESCRAMBLE ? din[i] : s};
    end
    hist_d = h;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  hist_q <= '1;
    else if (en) hist_q <= hist_d;
  end

endmodule
