// serial_link_pkg: constants, types and Galois-field arithmetic shared by the
// radiation-tolerant serial link.
//
// The line code works on 8-bit symbols in GF(2^8), generated by the primitive
// polynomial x^8+x^4+x^3+x^2+1 (0x11D) with primitive element alpha = 0x02.
// The Reed-Solomon code is the full-length RS(255, 255-2T) code whose
// generator has the 2T consecutive roots alpha^0 .. alpha^(2T-1).  Four
// protection levels can be selected at run time: no parity, 2T = 4, 2T = 8
// and 2T = 16 parity symbols per codeword.  Two codewords are interleaved
// symbol by symbol into one packet, which starts with a four-byte header:
// a 16-bit sync word, the protection level of the packet and the level the
// sender asks its peer to use in the opposite direction, each level sent as
// three copies of a 2-bit code.
//
// The symbol size, field polynomial, code length, the set of levels and the
// packet format are this design's own choices; the paper states only that a
// scrambler, an adaptive Reed-Solomon code and an interleaver that doubles
// the correction capability form the line code.
package serial_link_pkg;

  localparam int unsigned SYM_W      = 8;
  localparam int unsigned RS_N       = 255;            // symbols per codeword
  localparam int unsigned NPAR_MAX   = 16;             // parity symbols at the strongest level
  localparam int unsigned ILV_DEPTH  = 2;              // codewords per packet (interleaving depth)
  localparam int unsigned HDR_LEN    = 4;              // header bytes per packet
  localparam int unsigned FRAME_LEN  = HDR_LEN + ILV_DEPTH * RS_N;  // 514 bytes per packet
  localparam int unsigned POS_W      = 12;             // width of byte-in-packet counters
  localparam logic [15:0] SYNC_WORD  = 16'hF628;

  typedef logic [SYM_W-1:0] sym_t;

  // Protection level of the Reed-Solomon code.
  typedef enum logic [1:0] {
    PROT_NONE = 2'd0,   // RS(255,255): no parity, full bandwidth
    PROT_T2   = 2'd1,   // RS(255,251): corrects 2 symbols per codeword
    PROT_T4   = 2'd2,   // RS(255,247): corrects 4 symbols per codeword
    PROT_T8   = 2'd3    // RS(255,239): corrects 8 symbols per codeword
  } prot_e;

  typedef sym_t [NPAR_MAX:0] gpoly_t;   // polynomial coefficients, index = degree

  function automatic int unsigned npar_of(prot_e p);
    case (p)
      PROT_NONE: return 0;
      PROT_T2:   return 4;
      PROT_T4:   return 8;
      default:   return 16;
    endcase
  endfunction

  // Multiplication in GF(2^8) modulo 0x11D.
  function automatic sym_t gf_mul(sym_t a, sym_t b);
    sym_t p;
    sym_t aa;
    p  = '0;
    aa = a;
    for (int i = 0; i < SYM_W; i++) begin
      if (b[i]) p = p ^ aa;
      aa = aa[7] ? ((aa << 1) ^ 8'h1D) : (aa << 1);
    end
    return p;
  endfunction

  // Inverse in GF(2^8): a^254 = a^2 * a^4 * ... * a^128.  gf_inv(0) = 0.
  function automatic sym_t gf_inv(sym_t a);
    sym_t sq;
    sym_t r;
    sq = gf_mul(a, a);
    r  = sq;
    for (int i = 0; i < 6; i++) begin
      sq = gf_mul(sq, sq);
      r  = gf_mul(r, sq);
    end
    return r;
  endfunction

  // alpha^e for any non-negative exponent (used for constants only).
  function automatic sym_t gf_alpha_pow(int unsigned e);
    sym_t r;
    r = 8'h01;
    for (int unsigned i = 0; i < (e % 255); i++) r = gf_mul(r, 8'h02);
    return r;
  endfunction

  // Generator polynomial g(x) = prod_{j=0}^{npar-1} (x + alpha^j).
  function automatic gpoly_t rs_gen_poly(int unsigned npar);
    gpoly_t g;
    sym_t   root;
    g    = '0;
    g[0] = 8'h01;
    root = 8'h01;
    for (int unsigned j = 0; j < npar; j++) begin
      for (int k = NPAR_MAX; k > 0; k--) g[k] = g[k-1] ^ gf_mul(g[k], root);
      g[0] = gf_mul(g[0], root);
      root = gf_mul(root, 8'h02);
    end
    return g;
  endfunction

  // Frame aligner state; the aligner keeps three copies of it (TMR).
  typedef enum logic [1:0] {AL_HUNT = 2'd0, AL_VERIFY = 2'd1, AL_LOCK = 2'd2} align_st_e;

  typedef struct packed {
    align_st_e        st;       // hunting, verifying or locked
    logic [2:0]       offset;   // bit offset of the packet boundary in the received words
    logic [POS_W-1:0] pos;      // packet byte that the current word completes
    logic [3:0]       cnt;      // sync words confirmed (verify) or missed (lock)
    logic [15:0]      hist;     // the two previous received words
    sym_t             dout;     // aligned byte (registered output)
    logic             dvalid;   // dout belongs to a locked packet
    logic [POS_W-1:0] dpos;     // position of dout in its packet
    logic             lol;      // loss of lock in this cycle
  } align_t;

  // Status of one link end (all counters wrap).
  typedef struct packed {
    logic        locked;        // receiver aligned to the peer's packets
    prot_e       tx_prot;       // level this end transmits with
    prot_e       req_prot;      // level this end asks the peer to use
    logic [31:0] lol_count;     // losses of lock
    logic [31:0] cw_count;      // codewords decoded
    logic [31:0] corr_count;    // symbols corrected
    logic [31:0] fail_count;    // uncorrectable codewords
    logic [31:0] tmr_count;     // cycles with the aligner copies in disagreement
    logic [31:0] level_changes; // changes of the requested level
    logic [31:0] scrub_frames;  // configuration frames scanned
    logic [31:0] scrub_repairs; // configuration frames rewritten
    logic [31:0] test_bytes;    // bytes checked by the tester
    logic [31:0] test_errors;   // errored bytes seen by the tester
  } link_status_t;

  // Bitwise two-out-of-three majority.
  function automatic logic [1:0] maj3_2b(logic [5:0] v);
    return (v[1:0] & v[3:2]) | (v[1:0] & v[5:4]) | (v[3:2] & v[5:4]);
  endfunction

endpackage
