// mer_meter: modulation error ratio of the received constellation (paper
// Fig. 1 "Constellation / MER").
//
// Transmitted QAM symbols (ref_valid) are queued in a FIFO of DEPTH entries;
// each received symbol (rx_valid, after demodulation and resource
// demapping) is paired with the oldest queued one. The block accumulates
//   sig = sum |d|^2,  err = sum |d_rx - d|^2,  count
// so that MER = 10 log10(sig / err) dB. The paper names the measurement
// only; the FIFO pairing is this design's choice. clear restarts the sums.
module mer_meter
  import gfdm_pkg::*;
#(
  parameter int unsigned DEPTH = 8192
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  cplx_t       ref_sym,
  input  logic        ref_valid,
  input  cplx_t       rx_sym,
  input  logic        rx_valid,
  output logic [63:0] sig,
  output logic [63:0] err,
  output logic [31:0] count,
  output logic        overflow
);
  localparam int unsigned AW = $clog2(DEPTH);
  cplx_t q [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0] fill;
  logic push, pop;
  cplx_t r;
  longint er, ei;

  assign push = ref_valid && fill < (AW+1)'(DEPTH);
  assign pop  = rx_valid && fill != 0;
  assign r    = q[rp];
  assign er   = longint'(rx_sym.re) - longint'(r.re);
  assign ei   = longint'(rx_sym.im) - longint'(r.im);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp       <= '0;
      rp       <= '0;
      fill     <= '0;
      sig      <= '0;
      err      <= '0;
      count    <= '0;
      overflow <= 1'b0;
    end else begin
      if (push) begin q[wp] <= ref_sym; wp <= wp + 1; end
      if (ref_valid && !push) overflow <= 1'b1;
      if (pop) rp <= rp + 1;
      fill <= fill + (push ? 1 : 0) - (pop ? 1 : 0);
      if (clear) begin
        sig   <= '0;
        err   <= '0;
        count <= '0;
      end else if (pop) begin
        sig   <= sig + 64'(longint'(r.re) * r.re + longint'(r.im) * r.im);
        err   <= err + 64'(er * er + ei * ei);
        count <= count + 1;
      end
    end
  end
endmodule
