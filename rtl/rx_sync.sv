// rx_sync: frame synchronism, frame unformatting and CP/CS removal
// ("Synchronism / Frame unformatter" and "Effective symbols" of the paper's
// Fig. 1) for both receive antennas.
//
// Timing: each antenna's samples are correlated with the stored sign
// pattern of the sync preamble of transmit antenna 1 (NSP QPSK samples,
// same PRBS as preamble_gen):  c = sum conj(s_i) r_(n-NSP+1+i).
// A frame is detected when |c1| + |c2| (|z| ~ |re| + |im|) exceeds THR/16 of
// the summed sample magnitudes of the window, i.e. a normalized correlation
// peak, once the window holds NSP received samples and its older half holds
// at least a quarter of the magnitude (the constant-envelope preamble fills
// the window evenly; a few strong preamble samples after a weak block tail
// must not trigger). The sample after the peak starts CE preamble 1. Then 2 + n_g blocks
// of L = 2NW + NCP + N + NCS samples follow; of each, the N samples after
// the first NW + NCP are passed on ("effective symbols") with their slot
// (CEP1, CEP2, DATA); the rest is dropped. After the frame the search
// restarts; in_frame is high from detection to the frame's end.
// One synchronizer drives both antennas so their blocks stay aligned (the
// paper's figure has one per antenna); only timing is recovered, not the
// carrier frequency offset. Both antennas' samples enter together
// (in_valid/in_ready) and leave together.
module rx_sync
  import gfdm_pkg::*;
#(
  parameter int unsigned K         = K_DEF,
  parameter int unsigned M         = M_DEF,
  parameter int unsigned NCP       = NCP_DEF,
  parameter int unsigned NCS       = NCS_DEF,
  parameter int unsigned NW        = NW_DEF,
  parameter int unsigned NSP       = 128,
  parameter logic [14:0] SYNC_SEED = 15'h5a5a,
  parameter int unsigned THR       = 8
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [7:0] n_g,
  input  cplx_t      in_y1, in_y2,
  input  logic       in_valid,
  output logic       in_ready,
  output cplx_t      out_y1, out_y2,
  output slot_t      out_slot,
  output logic       out_valid,
  input  logic       out_ready,
  output logic       in_frame,
  output logic       det       // pulses at each detected frame
);
  localparam int unsigned N = K * M;
  localparam int unsigned L = 2 * NW + NCP + N + NCS;

  typedef logic [1:0] ptab_t [NSP];   // [1] = re negative, [0] = im negative
  function automatic ptab_t mk_pat();
    ptab_t p;
    logic [14:0] s = SYNC_SEED;
    for (int i = 0; i < NSP; i++) begin
      p[i] = {s[14], s[13]};
      s = prbs15_next(prbs15_next(s));
    end
    return p;
  endfunction
  localparam ptab_t PAT = mk_pat();

  cplx_t win1 [NSP];
  cplx_t win2 [NSP];
  longint c1r, c1i, c2r, c2i, mag, mag_old, metric;

  function automatic longint labs(longint v);
    return v < 0 ? -v : v;
  endfunction

  // correlation over the window including the incoming sample
  always_comb begin
    cplx_t a, b;
    c1r = 0; c1i = 0; c2r = 0; c2i = 0; mag = 0; mag_old = 0;
    for (int i = 0; i < NSP; i++) begin
      a = (i == NSP - 1) ? in_y1 : win1[i + 1 < NSP ? i + 1 : 0];
      b = (i == NSP - 1) ? in_y2 : win2[i + 1 < NSP ? i + 1 : 0];
      // conj(s) r with s = (+-1, +-1): re = sr*rr + si*ri, im = sr*ri - si*rr
      c1r += (PAT[i][1] ? -longint'(a.re) : longint'(a.re)) + (PAT[i][0] ? -longint'(a.im) : longint'(a.im));
      c1i += (PAT[i][1] ? -longint'(a.im) : longint'(a.im)) - (PAT[i][0] ? -longint'(a.re) : longint'(a.re));
      c2r += (PAT[i][1] ? -longint'(b.re) : longint'(b.re)) + (PAT[i][0] ? -longint'(b.im) : longint'(b.im));
      c2i += (PAT[i][1] ? -longint'(b.im) : longint'(b.im)) - (PAT[i][0] ? -longint'(b.re) : longint'(b.re));
      mag += labs(a.re) + labs(a.im) + labs(b.re) + labs(b.im);
      if (i < NSP / 2) mag_old += labs(a.re) + labs(a.im) + labs(b.re) + labs(b.im);
    end
    metric = labs(c1r) + labs(c1i) + labs(c2r) + labs(c2i);
  end

  logic [7:0] blk, ng;
  logic [$clog2(NSP+1)-1:0] fill;   // window samples held (detection waits for a full window)
  logic [$clog2(L+1)-1:0] i;
  logic eff;
  assign eff       = in_frame && (int'(i) >= NW + NCP) && (int'(i) < NW + NCP + N);
  assign out_y1    = in_y1;
  assign out_y2    = in_y2;
  assign out_slot  = (blk == 0) ? SLOT_CEP1 : (blk == 1) ? SLOT_CEP2 : SLOT_DATA;
  assign out_valid = in_valid && eff;
  assign in_ready  = eff ? out_ready : 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_frame <= 1'b0;
      det      <= 1'b0;
      blk      <= '0;
      ng       <= '0;
      i        <= '0;
      fill     <= '0;
      for (int j = 0; j < NSP; j++) begin win1[j] <= '0; win2[j] <= '0; end
    end else begin
      det <= 1'b0;
      if (in_valid && in_ready) begin
        for (int j = 0; j < NSP - 1; j++) begin win1[j] <= win1[j+1]; win2[j] <= win2[j+1]; end
        win1[NSP-1] <= in_y1;
        win2[NSP-1] <= in_y2;
        if (int'(fill) < NSP) fill <= fill + 1;
        if (!in_frame) begin
          if (int'(fill) >= NSP - 1 && metric * 16 > mag * THR && mag > 0 && mag_old * 4 >= mag) begin
            in_frame <= 1'b1;
            det      <= 1'b1;
            blk      <= '0;
            i        <= '0;
            ng       <= n_g;
          end
        end else begin
          if (int'(i) == L - 1) begin
            i <= '0;
            if (blk == ng + 1) in_frame <= 1'b0;
            else blk <= blk + 1;
          end else i <= i + 1;
        end
      end
    end
  end
endmodule
