// tb_qam_mapper: for each QAM order (4/16/64/256) sends every bit pattern
// through the mapper and checks, independently of the mapper's formula,
// that (1) every point lies on the odd grid scaled by QAM_UNIT, (2) the
// 2^m patterns give 2^m distinct points, (3) the mapping is Gray: grid
// neighbours differ in exactly one bit, and (4) the first bit of each half
// is the sign (0 = positive). The output side is stalled at random.
module tb_qam_mapper;
  import gfdm_pkg::*;
  localparam int WD_CYCLES = 200000;
  `include "tb_common.svh"

  qam_t  qam;
  logic  in_bit, in_valid, in_ready, out_valid, out_ready;
  cplx_t out_sym;
  qam_mapper dut (.*);

  int pt_re [256];
  int pt_im [256];

  task automatic send(int code, int m);
    for (int b = 0; b < m; b++) begin
      in_bit   <= code[m-1-b];   // first transmitted bit = MSB of code
      in_valid <= 1'b1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
    end
    in_valid <= 1'b0;
  endtask

  initial begin
    in_bit = 0; in_valid = 0; out_ready = 0; qam = QAM4;
    @(posedge rst_n);
    for (int q = 0; q < 4; q++) begin
      int m, h, lim;
      qam = qam_t'(q);
      m = qam_bits(qam); h = m / 2; lim = (1 << h) - 1;
      for (int c = 0; c < (1 << m); c++) begin
        send(c, m);
        out_ready <= 1'b0;
        repeat ($urandom_range(0, 2)) @(posedge clk);
        while (!out_valid) @(posedge clk);
        pt_re[c] = int'(out_sym.re) / QAM_UNIT;
        pt_im[c] = int'(out_sym.im) / QAM_UNIT;
        `CHECK(out_sym.re % QAM_UNIT == 0 && out_sym.im % QAM_UNIT == 0, "off-grid point")
        `CHECK((pt_re[c] & 1) && (pt_im[c] & 1) && pt_re[c] <= lim && pt_re[c] >= -lim &&
               pt_im[c] <= lim && pt_im[c] >= -lim, "point outside the constellation")
        `CHECK((pt_re[c] < 0) == c[m-1] && (pt_im[c] < 0) == c[h-1], "sign bit rule")
        out_ready <= 1'b1;
        @(posedge clk);
        out_ready <= 1'b0;
      end
      for (int a = 0; a < (1 << m); a++)
        for (int b = a + 1; b < (1 << m); b++) begin
          int dr, di;
          dr = pt_re[a] - pt_re[b]; di = pt_im[a] - pt_im[b];
          `CHECK(dr != 0 || di != 0, "two codes share a point")
          if ((dr * dr + di * di) == 4)
            `CHECK($countones(a ^ b) == 1, "neighbours differ in more than one bit")
        end
    end
    `FINISH
  end
endmodule
