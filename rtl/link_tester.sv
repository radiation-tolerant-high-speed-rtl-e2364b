// link_tester: traffic generator and checker that monitors how the link
// responds to injected faults.
//
// The generator produces a PRBS-31 sequence (x^31 + x^28 + 1), eight bits per
// byte taken by the transmitter, most significant bit first.  The checker is
// self-synchronizing: it predicts each received bit from the 31 bits
// received before it, so it needs no seed and recovers by itself after a
// burst of errors.  A byte containing a mispredicted bit counts as an errored
// byte; one wrong received bit is seen up to three times (when it arrives and
// when it is used as tap 28 and tap 31).  The first FILL bytes after reset
// are not checked: they fill the checker's 31-bit history and, behind the
// link's descrambler, also cover the 58 bits that the descrambler needs to
// synchronize after the receiver first locks.
//
// Interface: `tx_take` consumes `tx_data` (the next byte is ready in the
// following cycle); `rx_valid`/`rx_data` are the bytes delivered by the
// receiver.  Counters: rx_count (bytes checked), err_count (errored bytes);
// `err` pulses with each errored byte.  The paper mentions a tester circuit
// but not its design; PRBS-31 and the byte counters are this design's.
module link_tester
  import serial_link_pkg::*;
#(
  parameter int unsigned FILL = 12
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        tx_take,
  output sym_t        tx_data,
  input  logic        rx_valid,
  input  sym_t        rx_data,
  output logic        err,
  output logic [31:0] rx_count,
  output logic [31:0] err_count
);

  logic [30:0] gen_q, gen_n, chk_q, chk_n;
  logic [$clog2(FILL+1)-1:0] fill_q;
  logic        bad;

  always_comb begin
    logic [30:0] h;
    logic        b;
    h = gen_q;
    for (int i = SYM_W - 1; i >= 0; i--) begin
      b          = h[30] ^ h[27];
      tx_data[i] = b;
      h          = {h[29:0], b};
    end
    gen_n = h;

    h   = chk_q;
    bad = 1'b0;
    for (int i = SYM_W - 1; i >= 0; i--) begin
      if (rx_data[i] != (h[30] ^ h[27])) bad = 1'b1;
      h = {h[29:0], rx_data[i]};
    end
    chk_n = h;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gen_q     <= '1;
      chk_q     <= '0;
      fill_q    <= '0;
      err       <= 1'b0;
      rx_count  <= '0;
      err_count <= '0;
    end else begin
      err <= 1'b0;
      if (tx_take) gen_q <= gen_n;
      if (rx_valid) begin
        chk_q <= chk_n;
        if (fill_q != $bits(fill_q)'(FILL)) begin
          fill_q <= fill_q + 1'b1;
        end else begin
          rx_count <= rx_count + 1'b1;
          if (bad) begin
            err       <= 1'b1;
            err_count <= err_count + 1'b1;
          end
        end
      end
    end
  end

endmodule
