// resource_mapper: places QAM symbols on the active part of the K x M GFDM
// resource grid (K_on x M_on in the paper).
//
// The grid is scanned in the order of the data vector d = (d_0 .. d_(M-1)),
// d_m = (d_(0,m) .. d_(K-1,m)), i.e. position n = m*K + k. A position is
// active when sc_mask[k] and ss_mask[m] are both set; it then carries the
// next input symbol, otherwise a zero. The output is one N = K*M-sample block
// after another (out_last marks the final position). Handshakes are
// valid/ready; the block adds no latency. Masks, rather than counts, are
// this design's way of making the active sub-carriers and sub-symbols
// configurable, which the paper states without detail.
module resource_mapper
  import gfdm_pkg::*;
#(
  parameter int unsigned K = K_DEF,
  parameter int unsigned M = M_DEF
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [K-1:0] sc_mask,
  input  logic [M-1:0] ss_mask,
  input  cplx_t        in_sym,
  input  logic         in_valid,
  output logic         in_ready,
  output cplx_t        out_sym,
  output logic         out_valid,
  output logic         out_last,
  input  logic         out_ready
);
  logic [$clog2(K)-1:0] k;
  logic [$clog2(M+1)-1:0] m;
  logic active;

  assign active    = sc_mask[k] && ss_mask[m];
  assign out_valid = active ? in_valid : 1'b1;
  assign in_ready  = active && out_ready;
  assign out_sym   = active ? in_sym : '0;
  assign out_last  = (int'(k) == K - 1) && (int'(m) == M - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k <= '0;
      m <= '0;
    end else if (out_valid && out_ready) begin
      if (int'(k) == K - 1) begin
        k <= '0;
        m <= (int'(m) == M - 1) ? '0 : m + 1;
      end else begin
        k <= k + 1;
      end
    end
  end
endmodule
