// rs_decoder: Reed-Solomon decoder for the four protection levels.
//
// Three stages work on three consecutive codewords at once:
//   1. Syndromes.  As the N received symbols arrive (highest degree first)
//      the 16 syndromes S_j = r(alpha^j) are accumulated by Horner's rule,
//      and the symbols are stored in one of four codeword slots.
//   2. Key equation.  The Berlekamp-Massey algorithm runs one iteration per
//      cycle, NPAR iterations in all, and yields the error locator Lambda(x)
//      and its degree L; one more cycle forms the error evaluator
//      Omega(x) = S(x)*Lambda(x) mod x^NPAR.
//   3. Chien search and Forney.  The stored symbols are read back in order;
//      for position i both polynomials are evaluated at alpha^-i.  Where
//      Lambda vanishes, the error value is Omega(alpha^-i) divided by the
//      odd part of Lambda at alpha^-i (first root alpha^0), and it is added
//      to the symbol.
// Stages 1 and 3 take N cycles each and stage 2 at most NPAR+1, so the
// decoder keeps up with one symbol per cycle apart from a short wait that
// the packet header absorbs.  A codeword with more than NPAR/2 errors is
// flagged when the number of roots found differs from L or L > NPAR/2.
//
// Interface: in_valid/in_sof/in_data/in_prot stream (no back-pressure;
// in_sof marks the first symbol, in_prot the codeword's level).  Outputs: the
// K = N - NPAR data symbols on out_valid/out_data with out_sof on the first,
// then one cycle of cw_done with cw_nerr (symbols corrected) and cw_fail
// (uncorrectable; its data symbols are passed on as they were changed).
// The first data symbol is sampled NPAR + 5 clock edges after the edge that
// takes the last received symbol, when stage 3 is free.  `overrun` flags a codeword lost
// because stage 2 was still busy.  The decoding algorithm and its structure
// are the classic ones and this design's choice; the paper names only the
// code and the adaptive protection.
module rs_decoder
  import serial_link_pkg::*;
#(
  parameter int unsigned N = RS_N
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic       in_sof,
  input  sym_t       in_data,
  input  prot_e      in_prot,
  output logic       out_valid,
  output logic       out_sof,
  output sym_t       out_data,
  output prot_e      out_prot,
  output logic       cw_done,
  output logic [4:0] cw_nerr,
  output logic       cw_fail,
  output logic       overrun
);

  localparam int unsigned CW = $clog2(N);
  typedef sym_t [NPAR_MAX-1:0] synd_t;
  typedef sym_t [NPAR_MAX:0]   poly_t;

  // alpha^j, and alpha^(-j*(N-1)) which starts the Chien search at degree N-1.
  function automatic poly_t step_consts();
    poly_t p;
    for (int unsigned j = 0; j <= NPAR_MAX; j++) p[j] = gf_alpha_pow(j);
    return p;
  endfunction
  function automatic poly_t init_consts();
    poly_t p;
    for (int unsigned j = 0; j <= NPAR_MAX; j++)
      p[j] = gf_alpha_pow((255 - ((j * (N - 1)) % 255)) % 255);
    return p;
  endfunction
  localparam poly_t STEP = step_consts();
  localparam poly_t INIT = init_consts();

  sym_t mem [4][N];

  // ---------------- stage 1: syndromes ----------------
  synd_t          acc_q;
  logic [CW-1:0]  icnt_q;
  logic           iact_q;
  logic [1:0]     wslot_q;
  prot_e          iprot_q;
  logic [CW-1:0]  icnt;
  logic           ifirst;
  synd_t          acc_n;
  // hand-over register to stage 2
  logic           s1_v_q;
  synd_t          s1_syn_q;
  prot_e          s1_prot_q;
  logic [1:0]     s1_slot_q;

  assign ifirst = in_valid && in_sof;
  assign icnt   = ifirst ? '0 : icnt_q;

  always_comb begin
    for (int j = 0; j < NPAR_MAX; j++)
      acc_n[j] = (ifirst ? '0 : gf_mul(acc_q[j], STEP[j])) ^ in_data;
  end

  always_ff @(posedge clk) begin
    if (in_valid && (ifirst || iact_q)) mem[wslot_q][icnt] <= in_data;
  end

  // ---------------- stage 2: Berlekamp-Massey ----------------
  typedef enum logic [1:0] {BM_IDLE, BM_ITER, BM_OMEGA, BM_DONE} bm_e;
  bm_e            bm_st_q;
  synd_t          bm_syn_q;
  poly_t          lam_q, bpol_q, omg_q;
  logic [4:0]     bm_r_q, bm_len_q;
  sym_t           bm_binv_q;
  prot_e          bm_prot_q;
  logic [1:0]     bm_slot_q;
  int unsigned    bm_npar;
  sym_t           disc;
  poly_t          bsh, lam_n, omg_n;
  sym_t           coef;

  assign bm_npar = npar_of(bm_prot_q);

  always_comb begin
    disc = '0;
    for (int i = 0; i <= NPAR_MAX; i++)
      if (i <= int'(bm_r_q) && int'(bm_r_q) - i < NPAR_MAX)
        disc = disc ^ gf_mul(lam_q[i], bm_syn_q[int'(bm_r_q) - i]);
    bsh  = {bpol_q[NPAR_MAX-1:0], 8'h00};
    coef = gf_mul(disc, bm_binv_q);
    for (int i = 0; i <= NPAR_MAX; i++) lam_n[i] = lam_q[i] ^ gf_mul(coef, bsh[i]);
    for (int i = 0; i <= NPAR_MAX; i++) begin
      omg_n[i] = '0;
      if (i < NPAR_MAX)
        for (int j = 0; j <= i; j++) omg_n[i] = omg_n[i] ^ gf_mul(bm_syn_q[j], lam_q[i-j]);
      if (i >= int'(bm_npar)) omg_n[i] = '0;
    end
  end

  // ---------------- stage 3: Chien search and Forney ----------------
  logic           ch_act_q;
  poly_t          ch_lam_q, ch_omg_q;
  logic [4:0]     ch_len_q;
  logic [4:0]     ch_roots_q;
  logic [CW-1:0]  ch_cnt_q;
  logic [1:0]     ch_slot_q;
  prot_e          ch_prot_q;
  int unsigned    ch_npar;
  sym_t           lam_val, lam_odd, omg_val, err_val, rsym;
  logic           is_root;

  assign ch_npar = npar_of(ch_prot_q);

  always_comb begin
    lam_val = '0;
    lam_odd = '0;
    omg_val = '0;
    for (int j = 0; j <= NPAR_MAX; j++) begin
      lam_val = lam_val ^ ch_lam_q[j];
      if (j % 2 == 1) lam_odd = lam_odd ^ ch_lam_q[j];
      omg_val = omg_val ^ ch_omg_q[j];
    end
    is_root = ch_act_q && (lam_val == '0);
    err_val = is_root ? gf_mul(omg_val, gf_inv(lam_odd)) : '0;
    rsym    = mem[ch_slot_q][ch_cnt_q];
  end

  logic start_ch, s1_done;
  assign s1_done  = in_valid && (ifirst || iact_q) && (icnt == CW'(N - 1));
  assign start_ch = (bm_st_q == BM_DONE) && !ch_act_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      acc_q      <= '0;
      icnt_q     <= '0;
      iact_q     <= 1'b0;
      wslot_q    <= '0;
      iprot_q    <= PROT_NONE;
      s1_v_q     <= 1'b0;
      s1_syn_q   <= '0;
      s1_prot_q  <= PROT_NONE;
      s1_slot_q  <= '0;
      bm_st_q    <= BM_IDLE;
      bm_syn_q   <= '0;
      lam_q      <= '0;
      bpol_q     <= '0;
      omg_q      <= '0;
      bm_r_q     <= '0;
      bm_len_q   <= '0;
      bm_binv_q  <= '0;
      bm_prot_q  <= PROT_NONE;
      bm_slot_q  <= '0;
      ch_act_q   <= 1'b0;
      ch_lam_q   <= '0;
      ch_omg_q   <= '0;
      ch_len_q   <= '0;
      ch_roots_q <= '0;
      ch_cnt_q   <= '0;
      ch_slot_q  <= '0;
      ch_prot_q  <= PROT_NONE;
      out_valid  <= 1'b0;
      out_sof    <= 1'b0;
      out_data   <= '0;
      out_prot   <= PROT_NONE;
      cw_done    <= 1'b0;
      cw_nerr    <= '0;
      cw_fail    <= 1'b0;
      overrun    <= 1'b0;
    end else begin
      overrun <= 1'b0;
      cw_done <= 1'b0;

      // stage 1
      if (in_valid && (ifirst || iact_q)) begin
        acc_q <= acc_n;
        if (ifirst) iprot_q <= in_prot;
        if (icnt == CW'(N - 1)) begin
          iact_q    <= 1'b0;
          icnt_q    <= '0;
          wslot_q   <= wslot_q + 1'b1;
          s1_syn_q  <= acc_n;
          s1_prot_q <= ifirst ? in_prot : iprot_q;
          s1_slot_q <= wslot_q;
          if (s1_v_q && bm_st_q != BM_IDLE) overrun <= 1'b1;
        end else begin
          iact_q <= 1'b1;
          icnt_q <= icnt + 1'b1;
        end
      end

      // hand-over: set when a codeword's syndromes are complete, cleared
      // when stage 2 takes them.
      s1_v_q <= s1_done || (s1_v_q && !(bm_st_q == BM_IDLE));

      // stage 2
      case (bm_st_q)
        BM_IDLE: if (s1_v_q) begin
          bm_syn_q  <= s1_syn_q;
          bm_prot_q <= s1_prot_q;
          bm_slot_q <= s1_slot_q;
          lam_q     <= poly_t'(1);
          bpol_q    <= poly_t'(1);
          bm_binv_q <= 8'h01;
          bm_r_q    <= '0;
          bm_len_q  <= '0;
          bm_st_q   <= (s1_prot_q == PROT_NONE) ? BM_OMEGA : BM_ITER;
        end
        BM_ITER: begin
          if (disc != '0) begin
            lam_q <= lam_n;
            if (2 * bm_len_q <= bm_r_q) begin
              bpol_q    <= lam_q;
              bm_len_q  <= bm_r_q + 1'b1 - bm_len_q;
              bm_binv_q <= gf_inv(disc);
            end else begin
              bpol_q <= bsh;
            end
          end else begin
            bpol_q <= bsh;
          end
          bm_r_q <= bm_r_q + 1'b1;
          if (int'(bm_r_q) == int'(bm_npar) - 1) bm_st_q <= BM_OMEGA;
        end
        BM_OMEGA: begin
          omg_q   <= omg_n;
          bm_st_q <= BM_DONE;
        end
        default: if (start_ch) bm_st_q <= BM_IDLE;
      endcase

      // stage 3
      out_valid <= 1'b0;
      out_sof   <= 1'b0;
      if (start_ch) begin
        ch_act_q   <= 1'b1;
        ch_cnt_q   <= '0;
        ch_roots_q <= '0;
        ch_len_q   <= bm_len_q;
        ch_slot_q  <= bm_slot_q;
        ch_prot_q  <= bm_prot_q;
        for (int j = 0; j <= NPAR_MAX; j++) begin
          ch_lam_q[j] <= gf_mul(lam_q[j], INIT[j]);
          ch_omg_q[j] <= gf_mul(omg_q[j], INIT[j]);
        end
      end else if (ch_act_q) begin
        for (int j = 0; j <= NPAR_MAX; j++) begin
          ch_lam_q[j] <= gf_mul(ch_lam_q[j], STEP[j]);
          ch_omg_q[j] <= gf_mul(ch_omg_q[j], STEP[j]);
        end
        if (is_root) ch_roots_q <= ch_roots_q + 1'b1;
        if (int'(ch_cnt_q) < int'(N - ch_npar)) begin
          out_valid <= 1'b1;
          out_sof   <= (ch_cnt_q == 0);
          out_data  <= rsym ^ err_val;
          out_prot  <= ch_prot_q;
        end
        if (ch_cnt_q == CW'(N - 1)) begin
          ch_act_q <= 1'b0;
          cw_done  <= 1'b1;
          cw_nerr  <= ch_roots_q + 5'(is_root);
          cw_fail  <= (5'(ch_roots_q + 5'(is_root)) != ch_len_q) || (2 * int'(ch_len_q) > int'(ch_npar));
        end else begin
          ch_cnt_q <= ch_cnt_q + 1'b1;
        end
      end
    end
  end

endmodule
