// iq_balance: blind IQ-imbalance compensation of one receive antenna
// (paper Fig. 1 "IQ Balance": removes the IQ imbalance of the RF chain).
//
// An imbalanced receiver sees x = s + b conj(s). The compensator outputs
//   y = x + w conj(x)
// and adapts w so that y becomes proper (E[y^2] = 0), which holds for the
// wanted signal: w <- w - y^2 / 2^MU_SHIFT. w is kept with 16 extra fraction
// bits (w_acc), its Q2.14 value is w_acc / 2^16. The method (circularity-based
// adaptation) is this design's choice; the paper gives only the function.
// adapt = 0 freezes w. Combinational datapath, no latency.
module iq_balance
  import gfdm_pkg::*;
#(
  parameter int unsigned MU_SHIFT = 12
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  adapt,
  input  cplx_t in_x,
  input  logic  in_valid,
  output logic  in_ready,
  output cplx_t out_x,
  output logic  out_valid,
  input  logic  out_ready,
  output cplx_t w
);
  longint wr_acc, wi_acc;
  longint yr, yi;

  assign w.re = sat(wr_acc >>> 16);
  assign w.im = sat(wi_acc >>> 16);
  // w conj(x) = (wr xr + wi xi) + j (wi xr - wr xi)
  assign yr = longint'(in_x.re) + ((longint'(w.re) * in_x.re + longint'(w.im) * in_x.im) >>> QF);
  assign yi = longint'(in_x.im) + ((longint'(w.im) * in_x.re - longint'(w.re) * in_x.im) >>> QF);
  assign out_x.re  = sat(yr);
  assign out_x.im  = sat(yi);
  assign out_valid = in_valid;
  assign in_ready  = out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wr_acc <= 0;
      wi_acc <= 0;
    end else if (in_valid && out_ready && adapt) begin
      // y^2 = (yr^2 - yi^2) + j 2 yr yi ; w is Q14 with 16 extra bits
      wr_acc <= wr_acc - (((yr * yr - yi * yi) <<< (QF + 16 - 24)) >>> MU_SHIFT);
      wi_acc <= wi_acc - (((2 * yr * yi) <<< (QF + 16 - 24)) >>> MU_SHIFT);
    end
  end
endmodule
