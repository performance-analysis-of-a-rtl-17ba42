// resource_demapper: takes the demodulated K x M grid (position n = m*K + k,
// one block after another) and keeps only the symbols of the active
// positions (sc_mask[k] and ss_mask[m]), in grid order; the inverse of
// resource_mapper. Valid/ready handshakes, no latency; inactive positions
// are consumed without output.
module resource_demapper
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
  input  logic         out_ready
);
  logic [$clog2(K)-1:0] k;
  logic [$clog2(M+1)-1:0] m;
  logic active;

  assign active    = sc_mask[k] && ss_mask[m];
  assign out_valid = in_valid && active;
  assign in_ready  = active ? out_ready : 1'b1;
  assign out_sym   = in_sym;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      k <= '0;
      m <= '0;
    end else if (in_valid && in_ready) begin
      if (int'(k) == K - 1) begin
        k <= '0;
        m <= (int'(m) == M - 1) ? '0 : m + 1;
      end else begin
        k <= k + 1;
      end
    end
  end
endmodule
