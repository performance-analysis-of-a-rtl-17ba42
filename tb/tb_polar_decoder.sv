// tb_polar_decoder: N = 64, S = 4, all four rates. The test bench encodes
// random information bits with its own reference (tb_polar_ref.svh), maps
// code bits to LLRs of +-20, and weakens and flips a few of them (at most
// two flipped LLRs per word, among the weakest). The SC decoder must return
// the information bits in index order; an error-free pass with no noise and
// word_done once per word are checked too. The output is stalled at random.
module tb_polar_decoder;
  import gfdm_pkg::*;
  localparam int WD_CYCLES = 2000000;
  localparam int PN = 64, PSH = 4, PMAX = 64;
  `include "tb_common.svh"
  `include "tb_polar_ref.svh"

  rate_t rate;
  logic signed [7:0] in_llr;
  logic  in_valid, in_ready, out_bit, out_valid, out_ready, word_done;
  polar_decoder #(.N(PN), .S(PSH)) dut (.*);

  bit msk [PMAX];
  bit u [PMAX];
  bit x [PMAX];
  bit expq [$];
  int dones = 0, words = 0, bit_err = 0;

  always @(posedge clk) if (word_done) dones++;

  initial begin
    in_llr = 0; in_valid = 0; rate = R1_2;
    @(posedge rst_n);
    for (int w = 0; w < 24; w++) begin
      int k, flips;
      rate = rate_t'(w % 4);
      k = polar_k(PN - PSH, rate);
      ref_mask(PN, PSH, k, msk);
      for (int i = 0; i < PMAX; i++) u[i] = msk[i] ? 1'($urandom) : 1'b0;
      for (int i = 0; i < PN; i++) if (msk[i]) expq.push_back(u[i]);
      ref_encode(PN, u, x);
      flips = 0;
      for (int i = 0; i < PN - PSH; i++) begin
        int mag;
        bit b;
        mag = 20; b = x[i];
        if (w >= 4 && $urandom_range(0, 9) == 0) begin
          mag = 3;
          if (flips < (rate == R1_2 ? 2 : 1) && $urandom_range(0, 1) == 0) begin b = !b; flips++; end
        end
        in_llr <= 8'(b ? -mag : mag); in_valid <= 1'b1;
        @(posedge clk);
        while (!in_ready) @(posedge clk);
      end
      in_valid <= 1'b0;
      words++;
      wait (expq.size() == 0);
    end
    repeat (4 * PN) @(posedge clk);
    `CHECK(dones == words, "word_done count")
    `CHECK(bit_err <= 2, $sformatf("%0d information bits wrong", bit_err))
    `FINISH
  end

  initial out_ready = 0;
  always @(negedge clk) out_ready <= ($urandom_range(0, 2) != 0);
  always @(posedge clk)
    if (out_valid && out_ready) begin
      bit e;
      e = expq.pop_front();
      checks++;
      if (out_bit != e) bit_err++;
    end
endmodule
