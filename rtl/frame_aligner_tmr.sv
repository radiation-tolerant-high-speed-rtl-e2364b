// frame_aligner_tmr: the frame alignment block with distributed triple
// modular redundancy, the protection the paper applies to this block.
//
// Three copies of frame_aligner run in parallel.  Each copy's register feeds
// back through its own majority voter of all three registers, so the
// combinational logic, the registers and the voters are all triplicated and
// a single upset in any of them is outvoted and then overwritten at the next
// clock edge.  The outputs are the majority of the three registers.
// `tmr_mismatch` is high in a cycle where the three copies disagree, which
// makes corrected upsets visible to monitoring.
//
// Interface: rx_word from the deserializer every cycle.  Outputs: aligned
// byte `dout` with `dvalid` and its packet position `dpos`, `locked`, and a
// one-cycle `lol` pulse on each loss of lock.  `upset` XORs a pattern into
// the register of one copy, for fault-injection tests; tie it to zero in use.
// The paper used a synthesis tool to triplicate the block; here the
// triplication is written out by hand with the same structure.
module frame_aligner_tmr
  import serial_link_pkg::*;
#(
  parameter int unsigned FLEN     = FRAME_LEN,
  parameter int unsigned VERIFY_N = 3,
  parameter int unsigned MISS_N   = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  sym_t                 rx_word,
  input  align_t [2:0]         upset,
  output sym_t                 dout,
  output logic                 dvalid,
  output logic [POS_W-1:0]     dpos,
  output logic                 locked,
  output logic                 lol,
  output logic                 tmr_mismatch
);

  localparam int unsigned W = $bits(align_t);

  align_t [2:0] q;
  align_t [2:0] voted;
  align_t       out;
  logic   [2:0] mm;

  for (genvar i = 0; i < 3; i++) begin : g_copy
    frame_aligner #(.FLEN(FLEN), .VERIFY_N(VERIFY_N), .MISS_N(MISS_N)) u_core (
      .clk      (clk),
      .rst_n    (rst_n),
      .rx_word  (rx_word),
      .state_in (voted[i]),
      .upset    (upset[i]),
      .state_q  (q[i])
    );
    tmr_voter #(.W(W)) u_vote (
      .a        (q[0]),
      .b        (q[1]),
      .c        (q[2]),
      .y        (voted[i]),
      .mismatch (mm[i])
    );
  end

  tmr_voter #(.W(W)) u_out_vote (
    .a        (q[0]),
    .b        (q[1]),
    .c        (q[2]),
    .y        (out),
    .mismatch ()
  );

  assign dout         = out.dout;
  assign dvalid       = out.dvalid;
  assign dpos         = out.dpos;
  assign locked       = (out.st == AL_LOCK);
  assign lol          = out.lol;
  assign tmr_mismatch = |mm;

endmodule
