// ber_meter: bit error counter of the performance-analysis section (paper
// Fig. 1 "BER pre-decod." and "BER post-decod.").
//
// Transmitted reference bits (ref_valid) are queued in a FIFO of DEPTH bits;
// every received bit (rx_valid) is compared with the oldest queued bit.
// bits and errors count compared and differing bits; clear restarts the
// counts (not the queue). overflow sticks when a reference bit was lost.
// The paper names the measurement only; the FIFO alignment is this design's
// way of pairing transmitted and received bits of the built-in loop.
module ber_meter #(
  parameter int unsigned DEPTH = 65536
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic        ref_bit,
  input  logic        ref_valid,
  input  logic        rx_bit,
  input  logic        rx_valid,
  output logic [31:0] bits,
  output logic [31:0] errors,
  output logic        overflow
);
  localparam int unsigned AW = $clog2(DEPTH);
  logic q [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0] fill;
  logic push, pop;

  assign push = ref_valid && fill < (AW+1)'(DEPTH);
  assign pop  = rx_valid && fill != 0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp       <= '0;
      rp       <= '0;
      fill     <= '0;
      bits     <= '0;
      errors   <= '0;
      overflow <= 1'b0;
    end else begin
      if (push) begin q[wp] <= ref_bit; wp <= wp + 1; end
      if (ref_valid && !push) overflow <= 1'b1;
      if (pop) rp <= rp + 1;
      fill <= fill + (push ? 1 : 0) - (pop ? 1 : 0);
      if (clear) begin
        bits   <= '0;
        errors <= '0;
      end else if (pop) begin
        bits   <= bits + 1;
        errors <= errors + ((q[rp] != rx_bit) ? 1 : 0);
      end
    end
  end
endmodule
