// tb_gfdm_transceiver_top: end-to-end test of the whole transceiver at a
// reduced size (K = 16 sub-carriers, M = 3 sub-symbols, CP 4, CS 2,
// window 2, 32-sample sync preamble, polar code N = 64 with 4 shortened
// bits). The transmit outputs are looped back into the receive inputs after
// a short random delay line of idle cycles (the cable model), so the built-in
// channel simulator (2x2 matrix, AWGN, DPD) is the only channel.
// Phases, each checked:
//   1 SISO, BDTM, 64-QAM, rate 3/4, noiseless: user bits in = bits out;
//   2 mode switch to MIMO (TR-STC), same data check;
//   3 rate and order switch: 16-QAM, rate 1/2, MIMO;
//   4 PRBS source, CDTM, AWGN on data with noiseless channel estimation:
//     BER before and after decoding are measured, the decoder must not make
//     it worse, MER must be finite.
// Mechanisms counted (a mechanism that never happens is a failure): frame
// detections, stuffing, BDTM idle gaps, SISO/MIMO switch, rate switch, PRBS
// frames, AGC gain changes, IQ-balance adaptation, output back-pressure
// stalls, and transmit back-pressure stalls.
module tb_gfdm_transceiver_top;
  import gfdm_pkg::*;
  localparam int WD_CYCLES = 3000000;
  localparam int K = 16, M = 3;
  `include "tb_common.svh"

  logic         prbs_en, mimo, noiseless_ce, meter_clear;
  dtm_t         dtm;
  rate_t        rate;
  qam_t         qam;
  logic [7:0]   n_g, n_fec;
  logic [K-1:0] sc_mask;
  logic [M-1:0] ss_mask;
  cplx_t        h11, h12, h21, h22, dpd_c3, tx1, tx2, rx1, rx2, iq_w1, iq_w2;
  logic [15:0]  sigma, agc_gain1, agc_gain2;
  logic         in_bit, in_valid, in_ready, tx_valid, tx_ready, rx_valid, rx_ready;
  logic         out_bit, out_valid, out_ready;
  logic [31:0]  ber_pre_bits, ber_pre_errors, ber_post_bits, ber_post_errors, mer_count, stuffed_bits;
  logic [63:0]  mer_sig, mer_err;
  logic         frame_det, rx_in_frame, est_done;

  gfdm_transceiver_top #(.K(K), .M(M), .NCP(4), .NCS(2), .NW(2), .PN(64), .PS(4), .NSP(32),
                         .FIFO_DEPTH(512)) dut (.*);

  // loop-back: transmit samples into the receiver
  assign rx1      = tx1;
  assign rx2      = tx2;
  assign rx_valid = tx_valid && tx_gate;
  assign tx_ready = rx_ready && tx_gate;
  logic tx_gate;
  always @(negedge clk) tx_gate <= ($urandom_range(0, 7) != 0);

  // user data
  bit sentq [$];
  int n_det = 0, n_stall_out = 0, n_stall_tx = 0, n_idle = 0, n_gain = 0, n_iq = 0;
  int n_mode = 0, n_rate = 0, n_prbs_frames = 0, n_out = 0, n_err = 0;
  logic [15:0] last_gain;
  cplx_t last_w;
  initial out_ready = 0;
  always @(negedge clk) out_ready <= ($urandom_range(0, 5) != 0);
  always @(posedge clk) if (rst_n) begin
    if (frame_det) begin n_det++; if (prbs_en) n_prbs_frames++; end
    if (out_valid && !out_ready) n_stall_out++;
    if (tx_valid && !tx_gate) n_stall_tx++;
    if (agc_gain1 != last_gain) n_gain++;
    if (iq_w1 != last_w) n_iq++;
    last_gain <= agc_gain1;
    last_w    <= iq_w1;
    if (out_valid && out_ready) begin
      bit e;
      n_out++;
      if (sentq.size() == 0) begin n_err++; end
      else begin e = sentq.pop_front(); if (e != out_bit) n_err++; end
    end
  end

  task automatic send_user(int nbits);
    for (int i = 0; i < nbits; i++) begin
      in_bit <= 1'($urandom); in_valid <= 1'b1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      sentq.push_back(in_bit);
    end
    in_valid <= 1'b0;
  endtask

  task automatic wait_drain(int maxc);
    int c = 0;
    while (sentq.size() != 0 && c < maxc) begin @(posedge clk); c++; end
    repeat (60000) @(posedge clk);   // let the rest of the frame (stuffing) pass
  endtask

  task automatic phase(string name, int nbits);
    int e0;
    e0 = n_err;
    send_user(nbits);
    wait_drain(400000);
    `CHECK(sentq.size() == 0, {name, ": not all user bits came out"})
    `CHECK(n_err == e0, {name, ": user bits differ"})
    sentq.delete();
  endtask

  initial begin
    prbs_en = 0; mimo = 0; noiseless_ce = 1; meter_clear = 0; dtm = BDTM;
    rate = R3_4; qam = QAM64; n_g = 2; n_fec = 6;
    sc_mask = 16'b0011_1111_1111_1100 & 16'hfffc;   // 12 candidate, 10 used below
    sc_mask = 16'b0001_1111_1111_1000;              // 10 active sub-carriers
    ss_mask = 3'b111;
    h11 = '{re: 16'sd13000, im: 16'sd3000};
    h21 = '{re: 16'sd2500,  im: -16'sd1500};
    h12 = '{re: -16'sd1800, im: 16'sd2200};
    h22 = '{re: 16'sd12000, im: -16'sd4000};
    sigma = 0; dpd_c3 = '{re: 16'sd0, im: 16'sd0};
    in_bit = 0; in_valid = 0;
    last_gain = 0; last_w = '{re: 0, im: 0};
    @(posedge rst_n);
    repeat (5) @(posedge clk);

    // 1: SISO
    phase("SISO 64-QAM r3/4", 60);
    // BDTM: nothing is sent while no data waits
    begin
      int busy = 0;
      repeat (2000) begin @(posedge clk); if (tx_valid) busy++; end
      if (busy == 0) n_idle++;
    end
    // 2: MIMO
    mimo = 1; n_mode++;
    phase("MIMO 64-QAM r3/4", 100);
    // 3: rate and order switch (2 code words per block)
    rate = R1_2; qam = QAM16; n_fec = 4; n_rate++;
    phase("MIMO 16-QAM r1/2", 40);
    mimo = 0; n_mode++;
    phase("SISO 16-QAM r1/2", 30);
    // 4: PRBS, CDTM, noisy data
    rate = R3_4; qam = QAM64; n_fec = 6; mimo = 1;
    meter_clear = 1; @(posedge clk); meter_clear = 0;
    prbs_en = 1; dtm = CDTM; sigma = 16'd60; noiseless_ce = 1;
    while (n_prbs_frames < 3) @(posedge clk);
    repeat (20000) @(posedge clk);
    $display("BER pre %0d/%0d post %0d/%0d  MER sig %0d err %0d over %0d",
             ber_pre_errors, ber_pre_bits, ber_post_errors, ber_post_bits, mer_sig, mer_err, mer_count);
    `CHECK(ber_pre_bits > 0 && ber_post_bits > 0 && mer_count > 0, "meters counted nothing")
    `CHECK(ber_post_errors * ber_pre_bits <= ber_pre_errors * ber_post_bits + ber_post_bits,
           "decoding made the BER worse")
    `CHECK(mer_err > 0 && mer_sig > 20 * mer_err, "MER below 13 dB in a mild channel")
    `CHECK(stuffed_bits > 0, "no stuffing removed")

    $display("mechanisms: det %0d idle %0d mode %0d rate %0d prbs %0d gain %0d iq %0d stall_out %0d stall_tx %0d",
             n_det, n_idle, n_mode, n_rate, n_prbs_frames, n_gain, n_iq, n_stall_out, n_stall_tx);
    `CHECK(n_det >= 4, "frames detected")
    `CHECK(n_idle > 0, "BDTM idle gap")
    `CHECK(n_mode >= 2, "SISO/MIMO switch")
    `CHECK(n_rate > 0, "rate switch")
    `CHECK(n_prbs_frames > 0, "PRBS frames")
    `CHECK(n_gain > 0, "AGC gain change")
    `CHECK(n_iq > 0, "IQ balance adaptation")
    `CHECK(n_stall_out > 0, "output back-pressure")
    `CHECK(n_stall_tx > 0, "transmit back-pressure")
    `FINISH
  end
endmodule
