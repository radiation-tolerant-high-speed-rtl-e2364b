// serial_link_top: one end of the radiation-tolerant bi-directional serial
// link.
//
// Transmit chain:  user or tester bytes -> self-synchronizing scrambler ->
//   Reed-Solomon encoder (level chosen by the peer) -> interleaver (two
//   codewords per packet) -> framer (sync word and levels) -> transceiver.
// Receive chain:  transceiver -> frame aligner (triplicated) -> header reader
//   -> deinterleaver -> Reed-Solomon decoder -> descrambler -> user / tester.
// The protection controller turns the receive-side error statistics into
// the level requested from the peer, carried in this end's packet headers;
// the level the peer requests sets this end's encoder.  The configuration
// scrubber runs alongside, on its own port.
//
// The multi-gigabit transceiver (serializer, deserializer, PLL) sits outside:
// gtx_tx_word is sent and gtx_rx_word received one byte per clock, the
// received word boundary being arbitrary.  The configuration memory port and
// the golden copy also sit outside, on the cfg_* and gold_* ports.
//
// User interface: the transmitter takes tx_data in every cycle with tx_take
// high (constant bit-rate pipe; the source must always have data).  With
// use_tester high the built-in PRBS tester supplies and checks the data.
// Received bytes come out on rx_valid/rx_data, rx_sof marking the first byte
// of each codeword's data; the payload per packet is 2*(255-NPAR) bytes.
// tx_force_* and req_force_* override the transmit level and the level
// requested from the peer.  aligner_upset injects upsets into the aligner
// copies (tie to zero in use).  All status is in `status`.
// Latency, transmit input to line: two codewords plus the encoder pass
// (about 2*255 cycles); line to receive output: about 2.5 packets.
module serial_link_top
  import serial_link_pkg::*;
#(
  parameter int unsigned CTRL_WIN    = 1024,
  parameter int unsigned CTRL_HOLD   = 4,
  parameter int unsigned NUM_FRAMES  = 28326,
  parameter int unsigned FRAME_WORDS = 101
) (
  input  logic                                       clk,
  input  logic                                       rst_n,
  // user data
  input  sym_t                                       tx_data,
  output logic                                       tx_take,
  output logic                                       rx_valid,
  output logic                                       rx_sof,
  output sym_t                                       rx_data,
  input  logic                                       use_tester,
  // protection level overrides
  input  logic                                       tx_force_en,
  input  prot_e                                      tx_force_prot,
  input  logic                                       req_force_en,
  input  prot_e                                      req_force_prot,
  // transceiver parallel interface
  output sym_t                                       gtx_tx_word,
  input  sym_t                                       gtx_rx_word,
  // fault injection into the triplicated aligner
  input  align_t [2:0]                               aligner_upset,
  // configuration memory port and golden copy
  input  logic                                       scrub_enable,
  output logic                                       cfg_rd_req,
  output logic [$clog2(NUM_FRAMES)-1:0]              cfg_rd_frame,
  input  logic                                       cfg_rd_valid,
  input  logic [31:0]                                cfg_rd_data,
  output logic                                       cfg_wr_en,
  output logic [$clog2(NUM_FRAMES)-1:0]              cfg_wr_frame,
  output logic [$clog2(FRAME_WORDS)-1:0]             cfg_wr_word,
  output logic [31:0]                                cfg_wr_data,
  output logic [$clog2(NUM_FRAMES*FRAME_WORDS)-1:0]  gold_addr,
  input  logic [31:0]                                gold_data,
  // status
  output link_status_t                               status
);

  // ---------------- transmit chain ----------------
  sym_t  src_byte, scr_byte, test_tx;
  logic  enc_in_ready, enc_out_valid, enc_out_ready, enc_out_sof;
  sym_t  enc_out_data;
  prot_e enc_out_prot, tx_prot, peer_req, req_prot;
  logic  ilv_out_valid, ilv_out_ready, ilv_out_sof;
  sym_t  ilv_out_data;
  prot_e ilv_out_prot;

  assign tx_prot  = tx_force_en ? tx_force_prot : peer_req;
  assign tx_take  = enc_in_ready;
  assign src_byte = use_tester ? test_tx : tx_data;

  sync_scrambler #(.DESCRAMBLE(1'b0)) u_scrambler (
    .clk (clk), .rst_n (rst_n), .en (enc_in_ready), .din (src_byte), .dout (scr_byte)
  );

  rs_encoder u_encoder (
    .clk (clk), .rst_n (rst_n), .prot (tx_prot),
    .in_valid (1'b1), .in_ready (enc_in_ready), .in_data (scr_byte),
    .out_valid (enc_out_valid), .out_ready (enc_out_ready), .out_data (enc_out_data),
    .out_sof (enc_out_sof), .out_prot (enc_out_prot)
  );

  interleaver u_interleaver (
    .clk (clk), .rst_n (rst_n),
    .in_valid (enc_out_valid), .in_ready (enc_out_ready), .in_data (enc_out_data),
    .in_prot (enc_out_prot),
    .out_valid (ilv_out_valid), .out_ready (ilv_out_ready), .out_data (ilv_out_data),
    .out_sof (ilv_out_sof), .out_prot (ilv_out_prot)
  );

  tx_framer u_framer (
    .clk (clk), .rst_n (rst_n),
    .in_valid (ilv_out_valid), .in_ready (ilv_out_ready), .in_data (ilv_out_data),
    .in_sof (ilv_out_sof), .in_prot (ilv_out_prot), .req_prot (req_prot),
    .tx_word (gtx_tx_word), .frame_start (), .underflow ()
  );

  // ---------------- receive chain ----------------
  sym_t             al_dout;
  logic             al_dvalid, al_locked, al_lol, al_mismatch;
  logic [POS_W-1:0] al_dpos;
  logic             df_valid, df_sof, df_req_upd, df_hdr_err;
  sym_t             df_data;
  prot_e            df_prot;
  logic             di_valid, di_sof;
  sym_t             di_data;
  prot_e            di_prot;
  logic             dec_valid, dec_sof, cw_done, cw_fail;
  sym_t             dec_data, dsc_byte;
  prot_e            dec_prot;
  logic [4:0]       cw_nerr;
  logic             lvl_up, lvl_down;

  frame_aligner_tmr u_aligner (
    .clk (clk), .rst_n (rst_n), .rx_word (gtx_rx_word), .upset (aligner_upset),
    .dout (al_dout), .dvalid (al_dvalid), .dpos (al_dpos), .locked (al_locked),
    .lol (al_lol), .tmr_mismatch (al_mismatch)
  );

  rx_deframer u_deframer (
    .clk (clk), .rst_n (rst_n), .din (al_dout), .dvalid (al_dvalid), .dpos (al_dpos),
    .out_valid (df_valid), .out_sof (df_sof), .out_data (df_data), .out_prot (df_prot),
    .peer_req (peer_req), .peer_req_upd (df_req_upd), .hdr_copy_err (df_hdr_err)
  );

  deinterleaver u_deinterleaver (
    .clk (clk), .rst_n (rst_n), .in_valid (df_valid), .in_sof (df_sof),
    .in_data (df_data), .in_prot (df_prot),
    .out_valid (di_valid), .out_data (di_data), .out_sof (di_sof), .out_prot (di_prot),
    .overrun ()
  );

  rs_decoder u_decoder (
    .clk (clk), .rst_n (rst_n), .in_valid (di_valid), .in_sof (di_sof),
    .in_data (di_data), .in_prot (di_prot),
    .out_valid (dec_valid), .out_sof (dec_sof), .out_data (dec_data), .out_prot (dec_prot),
    .cw_done (cw_done), .cw_nerr (cw_nerr), .cw_fail (cw_fail), .overrun ()
  );

  sync_scrambler #(.DESCRAMBLE(1'b1)) u_descrambler (
    .clk (clk), .rst_n (rst_n), .en (dec_valid), .din (dec_data), .dout (dsc_byte)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rx_valid <= 1'b0;
      rx_sof   <= 1'b0;
      rx_data  <= '0;
    end else begin
      rx_valid <= dec_valid;
      rx_sof   <= dec_sof;
      rx_data  <= dsc_byte;
    end
  end

  protection_controller #(.WIN(CTRL_WIN), .HOLD(CTRL_HOLD)) u_ctrl (
    .clk (clk), .rst_n (rst_n), .cw_done (cw_done), .cw_nerr (cw_nerr),
    .cw_fail (cw_fail), .rx_prot (dec_prot), .lol (al_lol), .hdr_err (df_hdr_err),
    .force_en (req_force_en), .force_prot (req_force_prot),
    .req_prot (req_prot), .level_up (lvl_up), .level_down (lvl_down)
  );

  // ---------------- configuration scrubber ----------------
  logic        scr_frame_done, scr_repair;
  logic [31:0] scr_scans, scr_repairs;

  config_scrubber #(.NUM_FRAMES(NUM_FRAMES), .FRAME_WORDS(FRAME_WORDS)) u_scrubber (
    .clk (clk), .rst_n (rst_n), .enable (scrub_enable),
    .cfg_rd_req (cfg_rd_req), .cfg_rd_frame (cfg_rd_frame),
    .cfg_rd_valid (cfg_rd_valid), .cfg_rd_data (cfg_rd_data),
    .cfg_wr_en (cfg_wr_en), .cfg_wr_frame (cfg_wr_frame), .cfg_wr_word (cfg_wr_word),
    .cfg_wr_data (cfg_wr_data), .gold_addr (gold_addr), .gold_data (gold_data),
    .frame_done (scr_frame_done), .repair (scr_repair),
    .scan_count (scr_scans), .repair_count (scr_repairs)
  );

  // ---------------- tester ----------------
  logic        test_err;
  logic [31:0] test_bytes, test_errors;

  link_tester u_tester (
    .clk (clk), .rst_n (rst_n), .tx_take (use_tester && enc_in_ready), .tx_data (test_tx),
    .rx_valid (use_tester && rx_valid), .rx_data (rx_data), .err (test_err),
    .rx_count (test_bytes), .err_count (test_errors)
  );

  // ---------------- status ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      status.lol_count     <= '0;
      status.cw_count      <= '0;
      status.corr_count    <= '0;
      status.fail_count    <= '0;
      status.tmr_count     <= '0;
      status.level_changes <= '0;
    end else begin
      if (al_lol)               status.lol_count     <= status.lol_count + 1'b1;
      if (cw_done)              status.cw_count      <= status.cw_count + 1'b1;
      if (cw_done && !cw_fail)  status.corr_count    <= status.corr_count + 32'(cw_nerr);
      if (cw_done && cw_fail)   status.fail_count    <= status.fail_count + 1'b1;
      if (al_mismatch)          status.tmr_count     <= status.tmr_count + 1'b1;
      if (lvl_up || lvl_down)   status.level_changes <= status.level_changes + 1'b1;
    end
  end

  assign status.locked        = al_locked;
  assign status.tx_prot       = tx_prot;
  assign status.req_prot      = req_prot;
  assign status.scrub_frames  = scr_scans;
  assign status.scrub_repairs = scr_repairs;
  assign status.test_bytes    = test_bytes;
  assign status.test_errors   = test_errors;

endmodule
