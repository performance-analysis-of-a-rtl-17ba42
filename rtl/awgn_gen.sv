// awgn_gen: adds white Gaussian noise to one antenna's sample stream (paper
// Fig. 1 "AWGN 1/2", part of the built-in channel simulator).
//
// Each noise component is the sum of 12 uniform 16-bit numbers (variance
// 12 * 2^32 / 12 = 2^32, i.e. standard deviation 2^16), scaled by sigma / 2^16,
// so sigma is the per-component standard deviation in sample units. The
// uniforms come from two 64-bit xorshift generators (one per component),
// each stepped three times per sample and cut into four 16-bit pieces per
// step. The paper measures with noise on the whole frame ("noisy channel
// estimation") or with the CE preambles left clean; noiseless_ce = 1
// selects the latter using the in_ce flag. Generator and scaling are this
// design's choices. One register stage, valid/ready.
module awgn_gen
  import gfdm_pkg::*;
#(
  parameter logic [63:0] SEED = 64'h9e3779b97f4a7c15
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] sigma,
  input  logic        noiseless_ce,
  input  cplx_t       in_x,
  input  logic        in_ce,
  input  logic        in_valid,
  output logic        in_ready,
  output cplx_t       out_x,
  output logic        out_ce,
  output logic        out_valid,
  input  logic        out_ready
);
  logic [63:0] sa, sb;

  function automatic logic [63:0] xs(logic [63:0] s);
    logic [63:0] t;
    t = s ^ (s << 13);
    t = t ^ (t >> 7);
    t = t ^ (t << 17);
    return t;
  endfunction

  // sum of 12 signed 16-bit uniforms from three successive states
  function automatic longint gsum(logic [63:0] s0);
    logic [63:0] s;
    longint acc = 0;
    s = s0;
    for (int st = 0; st < 3; st++) begin
      s = xs(s);
      for (int p = 0; p < 4; p++) acc += longint'($signed(s[16*p +: 16]));
    end
    return acc;
  endfunction

  function automatic logic [63:0] xs3(logic [63:0] s);
    return xs(xs(xs(s)));
  endfunction

  longint nre, nim;
  logic add;
  assign nre = (gsum(sa) * longint'(sigma)) >>> 16;
  assign nim = (gsum(sb) * longint'(sigma)) >>> 16;
  assign add = !(noiseless_ce && in_ce);
  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sa        <= SEED;
      sb        <= ~SEED ^ 64'h0123456789abcdef;
      out_valid <= 1'b0;
      out_x     <= '0;
      out_ce    <= 1'b0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        sa     <= xs3(sa);
        sb     <= xs3(sb);
        out_ce <= in_ce;
        out_x  <= add ? '{re: sat(longint'(in_x.re) + nre), im: sat(longint'(in_x.im) + nim)} : in_x;
      end
    end
  end
endmodule
