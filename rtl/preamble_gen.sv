// preamble_gen: synchronization and channel-estimation preambles (paper
// Fig. 1 "Synchronism / channel est. Preambles" at the transmitter and the
// local replica "Preambles" at the receiver; Fig. 2d).
//
// The paper names the preambles but not their content; this design uses:
//  * sync preamble: NSP time-domain QPSK samples (+-SYNC_A per axis) from a
//    PRBS-15 started at SYNC_SEED (each antenna has its own seed);
//  * channel-estimation pilot: one frequency-domain block of N bins, QPSK
//    (+-PILOT_A per axis) from a PRBS-15 started at 1, zero on bins that no
//    active sub-carrier reaches (bin f belongs to sub-carriers f/M and
//    f/M + 1). It is sent through the normal IDFT / CP path by the frame
//    formatter, and replayed at the receiver for the channel estimator.
// Both are streams (valid always high, ready from the user) that restart
// after their last element.
module preamble_gen
  import gfdm_pkg::*;
#(
  parameter int unsigned K         = K_DEF,
  parameter int unsigned M         = M_DEF,
  parameter int unsigned NSP       = 128,
  parameter logic [14:0] SYNC_SEED = 15'h5a5a,
  parameter int signed   SYNC_A    = 2048
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [K-1:0] sc_mask,
  output cplx_t        pilot,
  output logic         pilot_valid,
  output logic         pilot_last,
  input  logic         pilot_ready,
  output cplx_t        sync,
  output logic         sync_valid,
  output logic         sync_last,
  input  logic         sync_ready
);
  localparam int unsigned N = K * M;
  logic [14:0] ps, ss;
  logic [$clog2(N+1)-1:0] f;
  logic [$clog2(NSP+1)-1:0] si;
  logic on;
  int unsigned k1;

  always_comb begin
    k1 = int'(f) / M;
    on = sc_mask[k1 % K] || sc_mask[(k1 + 1) % K];
  end

  assign pilot_valid = 1'b1;
  assign pilot_last  = (int'(f) == N - 1);
  assign pilot.re    = on ? (ps[14] ? SW'(-PILOT_A) : SW'(PILOT_A)) : '0;
  assign pilot.im    = on ? (ps[13] ? SW'(-PILOT_A) : SW'(PILOT_A)) : '0;
  assign sync_valid  = 1'b1;
  assign sync_last   = (int'(si) == NSP - 1);
  assign sync.re     = ss[14] ? SW'(-SYNC_A) : SW'(SYNC_A);
  assign sync.im     = ss[13] ? SW'(-SYNC_A) : SW'(SYNC_A);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ps <= 15'h1;
      ss <= SYNC_SEED;
      f  <= '0;
      si <= '0;
    end else begin
      if (pilot_ready) begin
        if (pilot_last) begin ps <= 15'h1; f <= '0; end
        else begin ps <= prbs15_next(prbs15_next(ps)); f <= f + 1; end
      end
      if (sync_ready) begin
        if (sync_last) begin ss <= SYNC_SEED; si <= '0; end
        else begin ss <= prbs15_next(prbs15_next(ss)); si <= si + 1; end
      end
    end
  end
endmodule
