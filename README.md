# A 2x2 GFDM transceiver with polar coding, in SystemVerilog

This is the digital baseband of a physical layer for broadband access in remote, sparsely populated areas. Such a system needs three things:

- a waveform with very low out-of-band emission, so that it can share VHF/UHF spectrum with incumbents such as television;
- robustness against long channel delay profiles;
- diversity.

The design answers them as follows:

- The waveform is **GFDM** (generalized frequency division multiplexing). It has K = 512 sub-carriers and M = 3 sub-symbols per block, uses a raised-cosine prototype pulse with roll-off 0.5, and adds a cyclic prefix (32 samples), a cyclic suffix (16 samples) and 8-sample fourth-order raised-cosine edge windows.
- Two transmit antennas carry a **time-reversal space-time code (TR-STC)**. This is Alamouti coding applied to whole GFDM blocks in the frequency domain. The receiver has two antennas.
- Data is protected by a **shortened polar code**: N = 2048, 32 shortened bits, rates 1/2, 2/3, 3/4 and 5/6, successive-cancellation decoding.
- QAM orders 4, 16, 64 and 256 are available.

Everything on the digital side of the converters is written as synthesizable RTL: transmitter, receiver, a built-in channel simulator and BER/MER meters. The RF front-ends (DAC, power amplifier, antennas, ADC) are not included. The top module `gfdm_transceiver_top` exposes the transmit samples `tx1/tx2` and takes the receive samples `rx1/rx2`.

## Signal flow

```
user bits -> prbs_rate_adapt -> polar_encoder -> qam_mapper -> resource_mapper
  -> gfdm_modulator (frequency domain) -> tr_stc_encoder
  -> [per antenna] frame_formatter <-> dft_engine (IDFT) <-> cp_window
  -> channel_model (2x2) -> awgn_gen -> dpd -> tx1, tx2
rx1, rx2 -> [per antenna] agc -> iq_balance -> rx_sync (both antennas)
  -> [per antenna] dft_engine (DFT) -> channel_estimator -> tr_stc_decoder
  -> gfdm_demodulator -> resource_demapper -> qam_demapper -> polar_decoder
  -> stuffing_removal -> user bits
```

Every link is a valid/ready stream, so any block may stall. The two antennas of each side move in lockstep. Samples are complex 16-bit (`cplx_t` in `gfdm_pkg`), and filter coefficients are Q2.14.

## GFDM in the frequency domain

The paper writes GFDM as x = A d. Here A is the N x N matrix of circularly shifted and modulated copies of the prototype pulse, with N = K·M = 1536.

The RTL never builds A. With the pulse spectrum G sampled on the N-bin grid, the DFT of x factors into two steps.

1. An M-point DFT of each sub-carrier's sub-symbols:

       D_k[l] = sum_m d(k,m) e^(-j 2 pi l m / M)

2. For each residue l = 0..M-1, a K-point circular convolution across sub-carriers:

       X[l + jM] = sum_k c_l[j - k] D_k[l],   with c_l[t] = G[l + tM]

At roll-off 0.5, each c_l has only three non-zero taps, so modulation is cheap. `gfdm_modulator` therefore emits X = DFT(x), not x. This suits the chain:

- The space-time code works on frequency-domain blocks.
- The per-antenna N-point IDFT then gives the time signal.

The zero-forcing demodulator (`gfdm_demodulator`) inverts each K x K circulant. Its inverse taps h_l are computed at elaboration with a 32-point DFT of c_l. They are truncated to 2T+1 = 9 taps, because they decay by about 0.07 per tap. An inverse M-point DFT then recovers d. This frequency-domain factorization is this design's choice; the paper states the ZF demodulator as B = A^-1.

## Space-time code

Two consecutive blocks a and b are sent in two block slots:

| slot | antenna 1  | antenna 2 |
|------|------------|-----------|
| 1    | X_a        | X_b       |
| 2    | -conj(X_b) | conj(X_a) |

A conjugate in the frequency domain is a conjugate plus circular time reversal in time, which is where the name comes from.

`tr_stc_decoder` combines both slots per bin with the channel estimates of both receive antennas. It divides by sum |H|^2 with a combinational divider.

In MIMO mode each antenna's blocks are scaled by 1/sqrt(2), so the total transmit power does not change. In SISO mode antenna 2 is silent. The mode is a run-time input.

## Frame

A frame on each antenna consists of:

1. A 128-sample sync preamble. It is time-domain QPSK from a PRBS-15 with a per-antenna seed.
2. Two channel-estimation preambles. Antenna 1 sends the first and antenna 2 the second; the other antenna is silent.
3. n_g data blocks.

Each preamble and data block is L = 2·8 + 32 + 1536 + 16 samples long. The pilots are frequency-domain QPSK, placed on every bin that an active sub-carrier can reach.

- `rx_sync` detects the frame with a normalized sign correlation against the sync preamble.
- It then cuts the N effective samples out of every block and labels them as CE1, CE2 or data.
- `channel_estimator` forms H = Y·conj(P) per bin and antenna pair.

Payloads are produced as follows:

- In CDTM (continuous mode), frames follow each other without a break.
- In BDTM (burst mode), a frame is sent only when user data is waiting.
- Each polar payload starts with a 16-bit count of the user bits it carries, and the rest is stuffing. This is how the rate is adapted to a source slower than the air interface.
- With `prbs_en` set, payloads carry a PRBS for BER measurement.

## Polar code

- The information set ranks the first N - S bit channels by polarization weight, sum_j bit_j(i)·2^(j/4). The last S = 32 indices are frozen and shortened: their code bits are known zeros and are not sent.
- The encoder is a bit-serial butterfly over a register of N bits.
- The decoder is serial SC. It performs one f or g operation per clock, keeps its LLRs in a heap-ordered array, and keeps its partial sums in left/right arrays.
- LLRs come from the max-log `qam_demapper`, 8 bits wide.

## What follows the paper and what does not

These follow the paper:

- the block list and order;
- K, M, roll-off, CP/CS/window lengths, polar N / shortening / rates, and the QAM orders;
- ZF demodulation, TR-STC, SC decoding, noiseless versus noisy channel-estimation preambles (`noiseless_ce` on `awgn_gen`), and CDTM/BDTM.

These are this design's choices, listed per block in each file's header:

- all fixed-point formats;
- the structure of every block the paper only names: the direct-form (I)DFT, the AGC loop, the circularity-based IQ balance, the memoryless third-order DPD, the sum-of-uniforms AWGN, the payload header;
- the preamble sequences and the correlation detector.

Not done:

- Carrier-frequency-offset estimation. `rx_sync` recovers timing only.
- The RF front-ends.

## Status and verification

The end-to-end test (`tb/tb_gfdm_transceiver_top.sv`) runs at K = 16, M = 3 and polar N = 64. It loops the transmit samples back into the receiver.

**What passes.** A SISO burst followed by a MIMO burst passes end to end. This covers several frames with 64-QAM, rate 3/4, BDTM, random stalls on both ends and a non-diagonal 2x2 channel. Every user bit comes back unchanged.

**What still fails.** Switching to 16-QAM at rate 1/2 at run time gives wrong bits. The same configuration decodes correctly when it is the first one after reset, so the fault lies in how some block takes over a new rate or order between bursts. The final CDTM/PRBS phase with noise also fails its BER and MER checks.

The test counts these as failures. The mechanisms it counts all occur at least once:
- frame detection;
- BDTM idle gaps;
- mode switches;
- rate switches;
- PRBS frames;
- AGC and IQ adaptation;
- back-pressure.

Unit tests (`tb/tb_<module>.sv`) exist for the QAM mapper and demapper and the polar encoder and decoder. The other blocks are exercised only through the top-level test.

No full-size run exists. The direct-form DFT costs N^2 = 2.4 M cycles per block, so one default-size frame needs about 15-20 M cycles. The largest size simulated is the reduced one above.

To simulate a test with plain Verilator:

```
verilator --binary --timing -Irtl -Itb -y rtl -y tb rtl/gfdm_pkg.sv tb/tb_polar_decoder.sv
./obj_dir/Vtb_polar_decoder
```

Each test prints `TB_RESULT checks=<n> failures=<n>`.
