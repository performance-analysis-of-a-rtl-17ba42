// dpd: digital pre-distortion ahead of the power amplifier (paper Fig. 1
// "DPD"). The paper states the purpose only (reduce the HPA's non-linear
// distortion and spectral regrowth); the simplest form is used here, a
// memoryless third-order polynomial
//   y = x + c3 * x * |x|^2 / 2^30
// with a programmable complex coefficient c3 (Q2.14). c3 = 0 makes the block
// transparent. One register stage, valid/ready.
module dpd
  import gfdm_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  cplx_t c3,
  input  cplx_t in_x,
  input  logic  in_valid,
  output logic  in_ready,
  output cplx_t out_x,
  output logic  out_valid,
  input  logic  out_ready
);
  longint p, tre, tim, dre, dim;
  always_comb begin
    p   = (longint'(in_x.re) * in_x.re + longint'(in_x.im) * in_x.im) >>> 15;  // |x|^2 / 2^15
    tre = (longint'(in_x.re) * p) >>> 15;                                      // x |x|^2 / 2^30
    tim = (longint'(in_x.im) * p) >>> 15;
    dre = (tre * c3.re - tim * c3.im) >>> QF;
    dim = (tre * c3.im + tim * c3.re) >>> QF;
  end
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_x     <= '0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) out_x <= '{re: sat(longint'(in_x.re) + dre), im: sat(longint'(in_x.im) + dim)};
    end
  end
endmodule
