// tb_qam_demapper: random bits go through qam_mapper (the stimulus source,
// tested on its own), a small random offset is added to each point, and
// the demapper must return the same bits as hard decisions, with LLR signs
// that agree (positive = 0). A point placed exactly on a decision boundary
// must give an LLR of zero magnitude for the sign bit. All four orders.
module tb_qam_demapper;
  import gfdm_pkg::*;
  localparam int WD_CYCLES = 400000;
  `include "tb_common.svh"

  qam_t  qam;
  logic  m_bit, m_valid, m_ready, s_valid, s_ready;
  cplx_t sym, nsym;
  logic signed [7:0] llr;
  logic  hard, d_valid, d_ready, d_in_ready;
  logic  force_zero;
  qam_mapper   u_map (.clk, .rst_n, .qam, .in_bit(m_bit), .in_valid(m_valid), .in_ready(m_ready),
                      .out_sym(sym), .out_valid(s_valid), .out_ready(s_ready));
  qam_demapper dut   (.clk, .rst_n, .qam, .in_sym(nsym), .in_valid(s_valid), .in_ready(d_in_ready),
                      .out_llr(llr), .out_bit(hard), .out_valid(d_valid), .out_ready(d_ready));
  assign s_ready = d_in_ready;

  int nr, ni;
  always_comb begin
    nsym.re = force_zero ? 16'sd0 : 16'(sym.re + nr);
    nsym.im = force_zero ? 16'sd0 : 16'(sym.im + ni);
  end

  bit sent [$];
  initial begin
    m_bit = 0; m_valid = 0; qam = QAM4; force_zero = 0; nr = 0; ni = 0;
    @(posedge rst_n);
    for (int q = 0; q < 4; q++) begin
      qam = qam_t'(q);
      for (int n = 0; n < 200 * qam_bits(qam); n++) begin
        m_bit   <= 1'($urandom);
        m_valid <= 1'b1;
        @(posedge clk);
        while (!m_ready) @(posedge clk);
        if (m_valid && m_ready) sent.push_back(m_bit);
      end
      m_valid <= 1'b0;
      wait (sent.size() == 0);
      repeat (20) @(posedge clk);
    end
    // boundary: the origin is on the sign boundary of both axes
    force_zero = 1; qam = QAM16;
    m_valid <= 1'b1; m_bit <= 1'b0;
    repeat (4) begin @(posedge clk); while (!m_ready) @(posedge clk); end
    m_valid <= 1'b0;
    wait (d_valid);
    @(negedge clk);
    `CHECK(llr == 0, "LLR of a point on the sign boundary is not zero")
    `FINISH
  end

  // random noise below half the point spacing; random output stalls
  always_ff @(posedge clk) begin
    if (s_valid && s_ready) begin
      nr <= $urandom_range(0, 2 * QAM_UNIT - 40) - (QAM_UNIT - 20);
      ni <= $urandom_range(0, 2 * QAM_UNIT - 40) - (QAM_UNIT - 20);
    end
    d_ready <= 1'($urandom);
    if (d_valid && d_ready && !force_zero) begin
      bit e;
      e = sent.pop_front();
      `CHECK(hard == e, "hard decision differs from the sent bit")
      `CHECK((llr >= 0) == (e == 0) || llr == 0, "LLR sign disagrees with the bit")
    end
  end
  initial d_ready = 0;
endmodule
