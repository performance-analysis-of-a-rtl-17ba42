// gfdm_transceiver_top: 2 x 2 GFDM transceiver with polar coding,
// frequency-domain time-reversal space-time coding, a built-in channel
// simulator and performance meters.
//
// Transmitter: prbs_rate_adapt -> polar_encoder -> qam_mapper ->
//   resource_mapper -> gfdm_modulator (frequency domain) -> tr_stc_encoder ->
//   per antenna: frame_formatter (frequency side: CE preambles and data) ->
//   dft_engine (IDFT) -> cp_window -> frame_formatter (time side: sync
//   preamble and blocks) -> channel_model (2x2) -> awgn_gen -> dpd -> tx port.
// Receiver: rx port -> per antenna agc -> iq_balance -> rx_sync (both
//   antennas) -> per antenna dft_engine (DFT) -> channel_estimator ->
//   tr_stc_decoder -> gfdm_demodulator -> resource_demapper -> qam_demapper ->
//   polar_decoder -> stuffing_removal -> user data port.
// Meters: BER before decoding (encoder output vs. hard demapper bits), BER
//   after decoding (encoder input vs. decoder output) and MER (mapper output
//   vs. resource-demapper output).
// The RF front-ends (DAC, HPA, antennas, ADC) are outside: tx1/tx2 go to
// them and rx1/rx2 come from them; a test bench closes the loop with a
// cable model. Every interface is a valid/ready stream, so the whole loop
// runs at the pace of its slowest block (the direct (I)DFTs); the two
// antennas of each side move in lockstep. Parameters default to the paper's
// numbers (K = 512, M = 3, CP 32, CS 16, window 8, polar N = 2048 with 32
// shortened bits).
module gfdm_transceiver_top
  import gfdm_pkg::*;
#(
  parameter int unsigned K       = K_DEF,
  parameter int unsigned M       = M_DEF,
  parameter int unsigned NCP     = NCP_DEF,
  parameter int unsigned NCS     = NCS_DEF,
  parameter int unsigned NW      = NW_DEF,
  parameter int unsigned PN      = PN_DEF,
  parameter int unsigned PS      = PSHORT_DEF,
  parameter int unsigned NSP     = 128,
  parameter int unsigned ROF_PCT = 50,
  parameter int unsigned FIFO_DEPTH = 4096
) (
  input  logic         clk,
  input  logic         rst_n,
  // configuration
  input  logic         prbs_en,
  input  dtm_t         dtm,
  input  rate_t        rate,
  input  qam_t         qam,
  input  logic         mimo,
  input  logic [7:0]   n_g,
  input  logic [7:0]   n_fec,
  input  logic [K-1:0] sc_mask,
  input  logic [M-1:0] ss_mask,
  input  cplx_t        h11, h12, h21, h22,
  input  logic [15:0]  sigma,
  input  logic         noiseless_ce,
  input  cplx_t        dpd_c3,
  input  logic         meter_clear,
  // user data in
  input  logic         in_bit,
  input  logic         in_valid,
  output logic         in_ready,
  // to the transmit front-ends
  output cplx_t        tx1, tx2,
  output logic         tx_valid,
  input  logic         tx_ready,
  // from the receive front-ends
  input  cplx_t        rx1, rx2,
  input  logic         rx_valid,
  output logic         rx_ready,
  // user data out
  output logic         out_bit,
  output logic         out_valid,
  input  logic         out_ready,
  // status
  output logic [31:0]  ber_pre_bits, ber_pre_errors,
  output logic [31:0]  ber_post_bits, ber_post_errors,
  output logic [63:0]  mer_sig, mer_err,
  output logic [31:0]  mer_count,
  output logic [31:0]  stuffed_bits,
  output logic         frame_det,
  output logic         rx_in_frame,
  output logic         est_done,
  output logic [15:0]  agc_gain1, agc_gain2,
  output cplx_t        iq_w1, iq_w2
);
  localparam int unsigned N = K * M;
  localparam logic [14:0] SEED1 = 15'h5a5a;
  localparam logic [14:0] SEED2 = 15'h2b3c;

  // ------------------------------------------------------------ transmitter
  logic ra_bit, ra_valid, ra_ready, ra_stuff, ra_first;
  prbs_rate_adapt #(.PN(PN), .PS(PS), .FIFO_DEPTH(FIFO_DEPTH)) u_rate (
    .clk, .rst_n, .prbs_en, .dtm, .rate, .n_fec,
    .in_bit, .in_valid, .in_ready,
    .out_bit(ra_bit), .out_valid(ra_valid), .out_stuff(ra_stuff), .out_first(ra_first),
    .out_ready(ra_ready));

  logic enc_bit, enc_valid, enc_ready, enc_start;
  polar_encoder #(.N(PN), .S(PS)) u_enc (
    .clk, .rst_n, .rate,
    .in_bit(ra_bit), .in_valid(ra_valid), .in_ready(ra_ready),
    .out_bit(enc_bit), .out_valid(enc_valid), .out_ready(enc_ready), .word_start(enc_start));

  cplx_t map_sym;
  logic  map_valid, map_ready;
  qam_mapper u_map (
    .clk, .rst_n, .qam,
    .in_bit(enc_bit), .in_valid(enc_valid), .in_ready(enc_ready),
    .out_sym(map_sym), .out_valid(map_valid), .out_ready(map_ready));

  cplx_t rm_sym;
  logic  rm_valid, rm_ready, rm_last;
  resource_mapper #(.K(K), .M(M)) u_rmap (
    .clk, .rst_n, .sc_mask, .ss_mask,
    .in_sym(map_sym), .in_valid(map_valid), .in_ready(map_ready),
    .out_sym(rm_sym), .out_valid(rm_valid), .out_last(rm_last), .out_ready(rm_ready));

  cplx_t mod_x;
  logic  mod_valid, mod_ready, mod_last;
  gfdm_modulator #(.K(K), .M(M), .ROF_PCT(ROF_PCT)) u_mod (
    .clk, .rst_n,
    .in_sym(rm_sym), .in_valid(rm_valid), .in_ready(rm_ready),
    .out_x(mod_x), .out_valid(mod_valid), .out_last(mod_last), .out_ready(mod_ready));

  cplx_t stc_x1, stc_x2;
  logic  stc_valid, stc_ready;
  tr_stc_encoder #(.N(N)) u_stc (
    .clk, .rst_n, .mimo,
    .in_x(mod_x), .in_valid(mod_valid), .in_ready(mod_ready),
    .out_x1(stc_x1), .out_x2(stc_x2), .out_valid(stc_valid), .out_ready(stc_ready));

  // per transmit antenna: preambles, frame formatter, IDFT, CP / window
  cplx_t pil   [2];
  logic  pil_v [2];
  logic  pil_r [2];
  cplx_t syn   [2];
  logic  syn_v [2];
  logic  syn_r [2];
  cplx_t fd    [2];
  logic  fd_v  [2];
  logic  fd_r  [2];
  slot_t fd_s  [2];
  logic  dat_r [2];
  cplx_t td    [2];
  logic  td_v  [2];
  logic  td_r  [2];
  cplx_t cp    [2];
  logic  cp_v  [2];
  logic  cp_r  [2];
  cplx_t fo    [2];
  logic  fo_v  [2];
  logic  fo_r  [2];
  logic  fo_ce [2];
  logic  fo_sof[2];

  // a coded pair of samples is taken only when both antennas take it; an
  // antenna that is not ready (idle between frames) still sees the raw valid
  // so that a burst can start on both at once
  assign stc_ready = dat_r[0] && dat_r[1];

  for (genvar a = 0; a < 2; a++) begin : g_txant
    logic pil_last_unused, syn_last_unused, td_last_unused, cp_last_unused;
    logic [1:0] td_tag_unused;
    preamble_gen #(.K(K), .M(M), .NSP(NSP), .SYNC_SEED(a == 0 ? SEED1 : SEED2)) u_pre (
      .clk, .rst_n, .sc_mask,
      .pilot(pil[a]), .pilot_valid(pil_v[a]), .pilot_last(pil_last_unused), .pilot_ready(pil_r[a]),
      .sync(syn[a]), .sync_valid(syn_v[a]), .sync_last(syn_last_unused), .sync_ready(syn_r[a]));

    frame_formatter #(.K(K), .M(M), .NCP(NCP), .NCS(NCS), .NW(NW), .NSP(NSP), .ANT(a + 1)) u_ff (
      .clk, .rst_n, .dtm, .mimo, .n_g,
      .data_x(a == 0 ? stc_x1 : stc_x2), .data_valid(stc_valid && (dat_r[1-a] || !dat_r[a])), .data_ready(dat_r[a]),
      .pilot(pil[a]), .pilot_valid(pil_v[a]), .pilot_ready(pil_r[a]),
      .fd_x(fd[a]), .fd_valid(fd_v[a]), .fd_ready(fd_r[a]), .fd_slot(fd_s[a]),
      .cp_x(cp[a]), .cp_valid(cp_v[a]), .cp_ready(cp_r[a]),
      .sync(syn[a]), .sync_valid(syn_v[a]), .sync_ready(syn_r[a]),
      .out_x(fo[a]), .out_valid(fo_v[a]), .out_ce(fo_ce[a]), .out_sof(fo_sof[a]), .out_ready(fo_r[a]));

    dft_engine #(.N(N), .INVERSE(1'b1)) u_idft (
      .clk, .rst_n,
      .in_x(fd[a]), .in_tag(fd_s[a]), .in_valid(fd_v[a]), .in_ready(fd_r[a]),
      .out_x(td[a]), .out_tag(td_tag_unused), .out_valid(td_v[a]), .out_last(td_last_unused), .out_ready(td_r[a]));

    cp_window #(.N(N), .NCP(NCP), .NCS(NCS), .NW(NW)) u_cp (
      .clk, .rst_n,
      .in_x(td[a]), .in_valid(td_v[a]), .in_ready(td_r[a]),
      .out_x(cp[a]), .out_valid(cp_v[a]), .out_last(cp_last_unused), .out_ready(cp_r[a]));
  end

  // built-in channel simulator
  cplx_t ch_y1, ch_y2;
  logic  ch_ce, ch_valid, ch_ready, ch_in_ready;
  assign fo_r[0] = ch_in_ready && fo_v[1];
  assign fo_r[1] = ch_in_ready && fo_v[0];
  channel_model u_chan (
    .clk, .rst_n, .h11, .h12, .h21, .h22,
    .in_x1(fo[0]), .in_x2(fo[1]), .in_ce(fo_ce[0] | fo_ce[1]),
    .in_valid(fo_v[0] && fo_v[1]), .in_ready(ch_in_ready),
    .out_y1(ch_y1), .out_y2(ch_y2), .out_ce(ch_ce), .out_valid(ch_valid), .out_ready(ch_ready));

  cplx_t aw   [2];
  logic  aw_v [2];
  logic  aw_r [2];
  logic  aw_ir[2];
  logic  aw_ce[2];
  cplx_t dp   [2];
  logic  dp_v [2];
  logic  dp_r [2];
  logic  dp_ir[2];
  assign ch_ready = aw_ir[0] && aw_ir[1];
  for (genvar a = 0; a < 2; a++) begin : g_txout
    awgn_gen #(.SEED(a == 0 ? 64'h9e3779b97f4a7c15 : 64'hd1b54a32d192ed03)) u_awgn (
      .clk, .rst_n, .sigma, .noiseless_ce,
      .in_x(a == 0 ? ch_y1 : ch_y2), .in_ce(ch_ce), .in_valid(ch_valid && ch_ready), .in_ready(aw_ir[a]),
      .out_x(aw[a]), .out_ce(aw_ce[a]), .out_valid(aw_v[a]), .out_ready(aw_r[a]));
    dpd u_dpd (
      .clk, .rst_n, .c3(dpd_c3),
      .in_x(aw[a]), .in_valid(aw_v[a]), .in_ready(dp_ir[a]),
      .out_x(dp[a]), .out_valid(dp_v[a]), .out_ready(dp_r[a]));
    assign aw_r[a] = dp_ir[a];
    assign dp_r[a] = tx_ready && dp_v[1-a];
  end
  assign tx1      = dp[0];
  assign tx2      = dp[1];
  assign tx_valid = dp_v[0] && dp_v[1];

  // --------------------------------------------------------------- receiver
  cplx_t ag   [2];
  logic  ag_v [2];
  logic  ag_ir[2];
  cplx_t iq   [2];
  logic  iq_v [2];
  logic  iq_ir[2];
  logic  sy_ready;
  logic [15:0] gain [2];
  cplx_t       wq   [2];
  for (genvar a = 0; a < 2; a++) begin : g_rxfe
    agc u_agc (
      .clk, .rst_n, .hold(rx_in_frame),
      .in_x(a == 0 ? rx1 : rx2), .in_valid(rx_valid), .in_ready(ag_ir[a]),
      .out_x(ag[a]), .out_valid(ag_v[a]), .out_ready(iq_ir[a]),
      .gain(gain[a]));
    iq_balance u_iq (
      .clk, .rst_n, .adapt(!rx_in_frame),
      .in_x(ag[a]), .in_valid(ag_v[a]), .in_ready(iq_ir[a]),
      .out_x(iq[a]), .out_valid(iq_v[a]), .out_ready(sy_ready),
      .w(wq[a]));
  end
  assign rx_ready  = ag_ir[0] && ag_ir[1];
  assign agc_gain1 = gain[0];
  assign agc_gain2 = gain[1];
  assign iq_w1     = wq[0];
  assign iq_w2     = wq[1];

  cplx_t sy1, sy2;
  slot_t sy_slot;
  logic  sy_valid, sy_ready_out;
  rx_sync #(.K(K), .M(M), .NCP(NCP), .NCS(NCS), .NW(NW), .NSP(NSP), .SYNC_SEED(SEED1)) u_sync (
    .clk, .rst_n, .n_g,
    .in_y1(iq[0]), .in_y2(iq[1]), .in_valid(iq_v[0] && iq_v[1]), .in_ready(sy_ready),
    .out_y1(sy1), .out_y2(sy2), .out_slot(sy_slot), .out_valid(sy_valid), .out_ready(sy_ready_out),
    .in_frame(rx_in_frame), .det(frame_det));

  cplx_t fx   [2];
  logic [1:0] fx_tag [2];
  logic  fx_v [2];
  logic  fx_r [2];
  logic  fx_ir[2];
  logic  est_ready;
  assign sy_ready_out = fx_ir[0] && fx_ir[1];
  for (genvar a = 0; a < 2; a++) begin : g_rxdft
    logic fx_last_unused;
    dft_engine #(.N(N), .INVERSE(1'b0)) u_dft (
      .clk, .rst_n,
      .in_x(a == 0 ? sy1 : sy2), .in_tag(sy_slot), .in_valid(sy_valid && sy_ready_out), .in_ready(fx_ir[a]),
      .out_x(fx[a]), .out_tag(fx_tag[a]), .out_valid(fx_v[a]), .out_last(fx_last_unused), .out_ready(fx_r[a]));
    assign fx_r[a] = est_ready && fx_v[1-a];
  end

  // receive-side pilot replica
  cplx_t rpil, rsyn_unused;
  logic  rpil_v, rpil_r, rpil_last_unused, rsyn_v_unused, rsyn_last_unused;
  preamble_gen #(.K(K), .M(M), .NSP(NSP), .SYNC_SEED(SEED1)) u_rxpre (
    .clk, .rst_n, .sc_mask,
    .pilot(rpil), .pilot_valid(rpil_v), .pilot_last(rpil_last_unused), .pilot_ready(rpil_r),
    .sync(rsyn_unused), .sync_valid(rsyn_v_unused), .sync_last(rsyn_last_unused), .sync_ready(1'b0));

  cplx_t ce_y1, ce_y2, eh11, eh12, eh21, eh22;
  logic  ce_valid, ce_ready;
  logic [$clog2(N)-1:0] hf;
  channel_estimator #(.N(N)) u_est (
    .clk, .rst_n,
    .in_y1(fx[0]), .in_y2(fx[1]), .in_slot(slot_t'(fx_tag[0])), .in_valid(fx_v[0] && fx_v[1]), .in_ready(est_ready),
    .pilot(rpil), .pilot_valid(rpil_v), .pilot_ready(rpil_r),
    .out_y1(ce_y1), .out_y2(ce_y2), .out_valid(ce_valid), .out_ready(ce_ready),
    .rd_f(hf), .h11(eh11), .h12(eh12), .h21(eh21), .h22(eh22), .est_done);

  cplx_t dec_x;
  logic  dec_valid, dec_ready;
  tr_stc_decoder #(.N(N)) u_stcdec (
    .clk, .rst_n, .mimo,
    .in_y1(ce_y1), .in_y2(ce_y2), .in_valid(ce_valid), .in_ready(ce_ready),
    .h_f(hf), .h11(eh11), .h12(eh12), .h21(eh21), .h22(eh22),
    .out_x(dec_x), .out_valid(dec_valid), .out_ready(dec_ready));

  cplx_t dm_sym;
  logic  dm_valid, dm_ready, dm_last_unused;
  gfdm_demodulator #(.K(K), .M(M), .ROF_PCT(ROF_PCT)) u_demod (
    .clk, .rst_n,
    .in_y(dec_x), .in_valid(dec_valid), .in_ready(dec_ready),
    .out_sym(dm_sym), .out_valid(dm_valid), .out_last(dm_last_unused), .out_ready(dm_ready));

  cplx_t rd_sym;
  logic  rd_valid, rd_ready;
  resource_demapper #(.K(K), .M(M)) u_rdmap (
    .clk, .rst_n, .sc_mask, .ss_mask,
    .in_sym(dm_sym), .in_valid(dm_valid), .in_ready(dm_ready),
    .out_sym(rd_sym), .out_valid(rd_valid), .out_ready(rd_ready));

  logic signed [7:0] llr;
  logic  hard, llr_valid, llr_ready;
  qam_demapper u_demap (
    .clk, .rst_n, .qam,
    .in_sym(rd_sym), .in_valid(rd_valid), .in_ready(rd_ready),
    .out_llr(llr), .out_bit(hard), .out_valid(llr_valid), .out_ready(llr_ready));

  logic pd_bit, pd_valid, pd_ready, pd_done;
  polar_decoder #(.N(PN), .S(PS)) u_dec (
    .clk, .rst_n, .rate,
    .in_llr(llr), .in_valid(llr_valid), .in_ready(llr_ready),
    .out_bit(pd_bit), .out_valid(pd_valid), .out_ready(pd_ready), .word_done(pd_done));

  stuffing_removal #(.PN(PN), .PS(PS)) u_unstuff (
    .clk, .rst_n, .prbs_en, .rate,
    .in_bit(pd_bit), .in_valid(pd_valid), .in_ready(pd_ready),
    .out_bit, .out_valid, .out_ready, .stuffed(stuffed_bits));

  // ------------------------------------------------------ performance meters
  logic ovf_pre, ovf_post, ovf_mer;
  ber_meter u_ber_pre (
    .clk, .rst_n, .clear(meter_clear),
    .ref_bit(enc_bit), .ref_valid(enc_valid && enc_ready),
    .rx_bit(hard), .rx_valid(llr_valid && llr_ready),
    .bits(ber_pre_bits), .errors(ber_pre_errors), .overflow(ovf_pre));
  ber_meter u_ber_post (
    .clk, .rst_n, .clear(meter_clear),
    .ref_bit(ra_bit), .ref_valid(ra_valid && ra_ready),
    .rx_bit(pd_bit), .rx_valid(pd_valid && pd_ready),
    .bits(ber_post_bits), .errors(ber_post_errors), .overflow(ovf_post));
  mer_meter u_mer (
    .clk, .rst_n, .clear(meter_clear),
    .ref_sym(map_sym), .ref_valid(map_valid && map_ready),
    .rx_sym(rd_sym), .rx_valid(rd_valid && rd_ready),
    .sig(mer_sig), .err(mer_err), .count(mer_count), .overflow(ovf_mer));

  // the two antennas of each side stay in lockstep
  a_tx_lockstep: assert property (@(posedge clk) disable iff (!rst_n) dat_r[0] == dat_r[1]);
  a_rx_lockstep: assert property (@(posedge clk) disable iff (!rst_n) fx_v[0] == fx_v[1]);
endmodule
