// channel_model: 2 x 2 flat channel of the built-in channel simulator
// (paper Fig. 1 "Channel model", h11 .. h22).
//
//   y1 = h11 x1 + h12 x2,   y2 = h21 x1 + h22 x2      (h_rx,tx, Q2.14 complex)
// The paper shows the four gains but not whether they are frequency
// selective; this design uses flat complex gains set through ports. The
// block registers its result (one cycle of latency) and passes the ce flag
// along. Valid/ready with a one-entry output register.
module channel_model
  import gfdm_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  cplx_t h11, h12, h21, h22,
  input  cplx_t in_x1, in_x2,
  input  logic  in_ce,
  input  logic  in_valid,
  output logic  in_ready,
  output cplx_t out_y1, out_y2,
  output logic  out_ce,
  output logic  out_valid,
  input  logic  out_ready
);
  function automatic cplx_t cmac2(cplx_t ha, cplx_t xa, cplx_t hb, cplx_t xb);
    longint re, im;
    re = longint'(ha.re) * xa.re - longint'(ha.im) * xa.im + longint'(hb.re) * xb.re - longint'(hb.im) * xb.im;
    im = longint'(ha.re) * xa.im + longint'(ha.im) * xa.re + longint'(hb.re) * xb.im + longint'(hb.im) * xb.re;
    return '{re: sat(re >>> QF), im: sat(im >>> QF)};
  endfunction

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_y1    <= '0;
      out_y2    <= '0;
      out_ce    <= 1'b0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_y1 <= cmac2(h11, in_x1, h12, in_x2);
        out_y2 <= cmac2(h21, in_x1, h22, in_x2);
        out_ce <= in_ce;
      end
    end
  end
endmodule
