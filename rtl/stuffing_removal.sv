// stuffing_removal: receive-side inverse of prbs_rate_adapt (paper Fig. 1
// "Stuffing removal / Data/PRBS").
//
// Each decoded payload of K_L = rate * (N - S) bits starts with a 16-bit
// count U (MSB first); the next U bits are user data and are passed on, the
// rest is stuffing and is dropped. With prbs_en = 1 payloads carry only PRBS
// (measured by the BER meters) and nothing is passed on. Valid/ready; user
// bits leave in the cycle they arrive. stuffed counts dropped stuffing bits.
module stuffing_removal
  import gfdm_pkg::*;
#(
  parameter int unsigned PN = PN_DEF,
  parameter int unsigned PS = PSHORT_DEF
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        prbs_en,
  input  rate_t       rate,
  input  logic        in_bit,
  input  logic        in_valid,
  output logic        in_ready,
  output logic        out_bit,
  output logic        out_valid,
  input  logic        out_ready,
  output logic [31:0] stuffed
);
  logic [15:0] pos, u_cnt, kl;
  logic is_data;

  assign kl        = 16'(polar_k(PN - PS, rate));
  assign is_data   = !prbs_en && pos >= 16 && pos < u_cnt + 16;
  assign out_bit   = in_bit;
  assign out_valid = in_valid && is_data;
  assign in_ready  = is_data ? out_ready : 1'b1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pos     <= '0;
      u_cnt   <= '0;
      stuffed <= '0;
    end else if (in_valid && in_ready) begin
      if (pos < 16) u_cnt <= {u_cnt[14:0], in_bit};
      else if (!is_data && !prbs_en) stuffed <= stuffed + 1;
      pos <= (pos == kl - 1) ? '0 : pos + 1;
    end
  end
endmodule
