// qam_demapper: soft and hard demapping of Gray square QAM (inverse of
// qam_mapper).
//
// Per axis the max-log bit LLRs of the Gray-coded PAM are computed with the
// usual piecewise-linear recursion (y in units of QAM_UNIT):
//   L1 = y,   L_(k+1) = 2^(h-k) - |L_k|
// A positive LLR favours bit 0. LLRs leave as LW-bit signed values, scaled by
// 2^-LSHIFT and saturated; the hard decision is the LLR sign. The paper only
// names the block; using max-log LLRs for the SC decoder is this design's
// choice (min-sum SC decoding does not depend on the LLR scale). One symbol is
// taken (in_valid/in_ready), then its m bits leave one per cycle
// (out_valid/out_ready): I bits first, then Q bits.
module qam_demapper
  import gfdm_pkg::*;
#(
  parameter int unsigned LW     = 8,
  parameter int unsigned LSHIFT = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  qam_t                 qam,
  input  cplx_t                in_sym,
  input  logic                 in_valid,
  output logic                 in_ready,
  output logic signed [LW-1:0] out_llr,
  output logic                 out_bit,
  output logic                 out_valid,
  input  logic                 out_ready
);
  localparam int signed LMAX = (1 << (LW - 1)) - 1;
  cplx_t      sym;
  qam_t       q;
  logic [3:0] cnt;
  int         h, l, y;

  assign in_ready = !out_valid;

  always_comb begin
    h = qam_bits(q) / 2;
    y = (int'(cnt) < h) ? int'(sym.re) : int'(sym.im);
    l = y;
    for (int k = 1; k < 4; k++)
      if (k <= ((int'(cnt) < h) ? int'(cnt) : int'(cnt) - h))
        l = ((1 << (h - k)) * QAM_UNIT) - (l < 0 ? -l : l);
    l = l >>> LSHIFT;
    if (l > LMAX) l = LMAX;
    if (l < -LMAX) l = -LMAX;
  end
  assign out_llr = (LW)'(l);
  assign out_bit = l < 0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sym       <= '0;
      q         <= QAM4;
      cnt       <= '0;
      out_valid <= 1'b0;
    end else if (!out_valid) begin
      if (in_valid) begin
        sym       <= in_sym;
        q         <= qam;
        cnt       <= '0;
        out_valid <= 1'b1;
      end
    end else if (out_ready) begin
      if (int'(cnt) == 2 * h - 1) out_valid <= 1'b0;
      else cnt <= cnt + 1;
    end
  end
endmodule
