// tmr_voter: bitwise two-out-of-three majority of three copies of a W-bit
// value, with a flag that the copies are not all equal.  Used by the
// triplicated frame aligner on every feedback path and on its outputs.
// Purely combinational.
module tmr_voter #(
  parameter int unsigned W = 1
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  input  logic [W-1:0] c,
  output logic [W-1:0] y,
  output logic         mismatch
);
  assign y        = (a & b) | (a & c) | (b & c);
  assign mismatch = (a != b) || (a != c);
endmodule
