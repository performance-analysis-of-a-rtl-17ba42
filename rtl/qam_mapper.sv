// qam_mapper: Gray-mapped square QAM (4, 16, 64 or 256 points).
//
// The paper lists the four orders; the bit-to-point mapping and the scale
// are this design's choices. Bits arrive serially (in_valid/in_ready). Of
// the m = log2(order) bits of a symbol the first m/2 select the in-phase
// level and the last m/2 the quadrature level, each by a reflected Gray
// code on the odd levels +-1, +-3, ..:
//   level = (b1 ? -1 : +1) * v1,  v_k = 2^(h-k) + (b_(k+1) ? +1 : -1) v_(k+1),  v_h = 1
// (h = m/2). Levels are scaled by QAM_UNIT. The order is sampled at the
// first bit of every symbol. One symbol leaves per m accepted bits
// (out_valid/out_ready); the mapper takes no new bit while a symbol waits.
module qam_mapper
  import gfdm_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  qam_t  qam,
  input  logic  in_bit,
  input  logic  in_valid,
  output logic  in_ready,
  output cplx_t out_sym,
  output logic  out_valid,
  input  logic  out_ready
);
  logic [7:0] bits;
  logic [3:0] cnt;
  qam_t       q;

  // PAM level of h Gray bits, b[0] = first bit (sign)
  function automatic int pam_level(logic [3:0] b, int h);
    int v = 1;
    for (int k = h - 1; k >= 1; k--) v = (1 << (h - k)) + (b[k] ? v : -v);
    return b[0] ? -v : v;
  endfunction

  int h;
  assign h         = qam_bits(q) / 2;
  assign in_ready  = !out_valid;
  assign out_sym.re = SW'(pam_level(bits[3:0], h) * QAM_UNIT);
  assign out_sym.im = SW'(pam_level(bits[7:4], h) * QAM_UNIT);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bits      <= '0;
      cnt       <= '0;
      q         <= QAM4;
      out_valid <= 1'b0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (in_valid && in_ready) begin
        if (cnt == 0) q <= qam;
        // bit cnt: first half -> I bits[0..h-1], second half -> Q bits[4..]
        if (int'(cnt) < ((cnt == 0) ? qam_bits(qam) / 2 : h)) bits[cnt] <= in_bit;
        else bits[4 + int'(cnt) - ((cnt == 0) ? qam_bits(qam) / 2 : h)] <= in_bit;
        if (int'(cnt) == ((cnt == 0) ? qam_bits(qam) : 2 * h) - 1) begin
          cnt       <= '0;
          out_valid <= 1'b1;
        end else begin
          cnt <= cnt + 1;
        end
      end
    end
  end
endmodule
