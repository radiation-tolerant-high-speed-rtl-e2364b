// serial_channel_model: behavioural stand-in for the transceiver pair and the
// fibre between two link ends (simulation only).
//
// Each clock it takes one byte from the transmitter and delivers one byte
// to the receiver, one cycle later.  The serial stream (bit 7 first) is
// delayed by `bit_delay` bits (0..7), so the receiver's word boundaries do
// not match the transmitter's; changing bit_delay while running loses or
// repeats bits, as a clock-data-recovery slip would.  `flip` is XORed into
// the delivered byte to inject line errors.
module serial_channel_model
  import serial_link_pkg::*;
(
  input  logic       clk,
  input  sym_t       tx_word,
  input  logic [2:0] bit_delay,
  input  sym_t       flip,
  output sym_t       rx_word
);
  sym_t        prev = '0;
  logic [15:0] pair;

  assign pair = {prev, tx_word};

  always_ff @(posedge clk) begin
    prev    <= tx_word;
    rx_word <= pair[7 + bit_delay -: 8] ^ flip;
  end
endmodule
