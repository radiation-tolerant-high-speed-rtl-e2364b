// rs_encoder: systematic Reed-Solomon encoder with a run-time protection level.
//
// The encoder takes K = 255 - NPAR data symbols and emits them unchanged,
// followed by NPAR parity symbols, the remainder of d(x)*x^NPAR divided by
// the generator polynomial (roots alpha^0 .. alpha^(NPAR-1)).  The remainder
// is built in a 16-stage linear feedback shift register; for a weaker level
// only its lowest NPAR stages are used and the feedback taps switch to that
// level's generator.  The level is sampled at the first symbol of every
// BLOCK_CW-th codeword, so that all codewords of one interleaved packet share
// one level, and travels with the output as `out_prot`.
//
// Interface: valid/ready on both sides, one symbol per cycle.  While data
// symbols pass, in_ready = out_ready and the output is combinational from
// the input; during the parity phase in_ready is low.  out_sof marks the first
// symbol of each codeword.  Adapting the parity count is the paper's idea; the
// levels, the single-LFSR structure and the handshake are this design's.
module rs_encoder
  import serial_link_pkg::*;
#(
  parameter int unsigned N        = RS_N,
  parameter int unsigned BLOCK_CW = ILV_DEPTH
) (
  input  logic  clk,
  input  logic  rst_n,
  input  prot_e prot,
  input  logic  in_valid,
  output logic  in_ready,
  input  sym_t  in_data,
  output logic  out_valid,
  input  logic  out_ready,
  output sym_t  out_data,
  output logic  out_sof,
  output prot_e out_prot
);

  localparam gpoly_t G4  = rs_gen_poly(4);
  localparam gpoly_t G8  = rs_gen_poly(8);
  localparam gpoly_t G16 = rs_gen_poly(16);

  sym_t [NPAR_MAX-1:0] par_q;
  logic [$clog2(N)-1:0]        cnt_q;
  logic [$clog2(BLOCK_CW+1)-1:0] cw_q;
  prot_e prot_q, cur_prot;
  int unsigned npar;
  gpoly_t g;
  logic data_phase, fire;
  sym_t top, fb;

  // The level is taken from the input at the first symbol of a block.
  assign cur_prot = (cnt_q == 0 && cw_q == 0) ? prot : prot_q;
  assign npar     = npar_of(cur_prot);

  always_comb begin
    case (cur_prot)
      PROT_T2: g = G4;
      PROT_T4: g = G8;
      PROT_T8: g = G16;
      default: g = '0;
    endcase
    top = (npar == 0) ? '0 : par_q[npar-1];
  end

  assign data_phase = (32'(cnt_q) < N - npar);
  assign in_ready   = data_phase && out_ready;
  assign out_valid  = data_phase ? in_valid : 1'b1;
  assign out_data   = data_phase ? in_data : top;
  assign out_sof    = (cnt_q == 0);
  assign out_prot   = cur_prot;
  assign fire       = out_valid && out_ready;
  assign fb         = in_data ^ top;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      par_q  <= '0;
      cnt_q  <= '0;
      cw_q   <= '0;
      prot_q <= PROT_NONE;
    end else if (fire) begin
      prot_q <= cur_prot;
      if (data_phase) begin
        for (int j = NPAR_MAX - 1; j > 0; j--)
          par_q[j] <= par_q[j-1] ^ ((j < npar) ? gf_mul(fb, g[j]) : '0);
        par_q[0] <= (npar == 0) ? '0 : gf_mul(fb, g[0]);
      end else begin
        for (int j = NPAR_MAX - 1; j > 0; j--) par_q[j] <= par_q[j-1];
        par_q[0] <= '0;
      end
      if (32'(cnt_q) == N - 1) begin
        cnt_q <= '0;
        par_q <= '0;
        cw_q  <= (32'(cw_q) == BLOCK_CW - 1) ? '0 : cw_q + 1'b1;
      end else begin
        cnt_q <= cnt_q + 1'b1;
      end
    end
  end

endmodule
