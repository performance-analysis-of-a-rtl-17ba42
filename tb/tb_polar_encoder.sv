// tb_polar_encoder: N = 64, S = 4 shortened bits, all four rates. Random
// information bits go into the encoder; the test bench builds u from its
// own information set (tb_polar_ref.svh), encodes it with the textbook
// butterfly and compares all N - S transmitted bits. It also checks that
// the encoder asks for exactly K bits per word, that the S shortened code
// bits of the reference are zero (the property shortening relies on), and
// it stalls the output at random.
module tb_polar_encoder;
  import gfdm_pkg::*;
  localparam int WD_CYCLES = 400000;
  localparam int PN = 64, PSH = 4, PMAX = 64;
  `include "tb_common.svh"
  `include "tb_polar_ref.svh"

  rate_t rate;
  logic  in_bit, in_valid, in_ready, out_bit, out_valid, out_ready, word_start;
  polar_encoder #(.N(PN), .S(PSH)) dut (.*);

  bit msk [PMAX];
  bit u [PMAX];
  bit x [PMAX];
  int taken, got;

  initial begin
    in_bit = 0; in_valid = 0; rate = R1_2;
    @(posedge rst_n);
    for (int w = 0; w < 16; w++) begin
      int k, p;
      rate = rate_t'(w % 4);
      k = polar_k(PN - PSH, rate);
      ref_mask(PN, PSH, k, msk);
      for (int i = 0; i < PMAX; i++) u[i] = 0;
      p = 0; taken = 0;
      for (int i = 0; i < PN; i++) if (msk[i]) u[i] = 1'($urandom);
      // feed the information bits in index order
      for (int i = 0; i < PN; i++) if (msk[i]) begin
        in_bit <= u[i]; in_valid <= 1'b1;
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        taken++;
      end
      in_valid <= 1'b0;
      ref_encode(PN, u, x);
      for (int i = PN - PSH; i < PN; i++) `CHECK(x[i] == 0, "reference: shortened bit not zero")
      got = 0;
      while (got < PN - PSH) begin
        @(posedge clk);
        if (out_valid && out_ready) begin
          `CHECK(out_bit == x[got], $sformatf("code bit %0d of word %0d", got, w))
          got++;
        end
      end
      `CHECK(taken == k, "number of information bits")
    end
    `FINISH
  end
  initial out_ready = 0;
  always @(negedge clk) out_ready <= ($urandom_range(0, 3) != 0);
endmodule
