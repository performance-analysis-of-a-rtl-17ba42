// agc: automatic gain control of one receive antenna (paper Fig. 1 "AGC":
// normalizes the input level to use the converter's dynamic range).
//
// y = x * gain / 2^10 (gain unsigned, 1.0 = 1024). The mean of |y.re| + |y.im|
// is measured over blocks of 2^AVG_LOG2 samples; after each block the gain
// moves by 1/16 of itself towards the level TARGET: down if the mean is
// above TARGET * 17/16, up if below TARGET * 15/16. hold = 1 freezes the gain
// (the receiver holds it during a frame, so preambles and data see the same
// gain). The loop and its constants are this design's choices; the paper
// gives only the function. Combinational datapath, no latency.
module agc
  import gfdm_pkg::*;
#(
  parameter int unsigned AVG_LOG2 = 6,
  parameter int unsigned TARGET   = 4096
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        hold,
  input  cplx_t       in_x,
  input  logic        in_valid,
  output logic        in_ready,
  output cplx_t       out_x,
  output logic        out_valid,
  input  logic        out_ready,
  output logic [15:0] gain
);
  logic [AVG_LOG2-1:0] cnt;
  longint acc, mean;
  logic signed [SW-1:0] ar, ai;

  assign out_x.re  = sat((longint'(in_x.re) * longint'(gain)) >>> 10);
  assign out_x.im  = sat((longint'(in_x.im) * longint'(gain)) >>> 10);
  assign out_valid = in_valid;
  assign in_ready  = out_ready;
  assign ar        = out_x.re < 0 ? -out_x.re : out_x.re;
  assign ai        = out_x.im < 0 ? -out_x.im : out_x.im;
  assign mean      = (acc + ar + ai) >>> AVG_LOG2;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gain <= 16'd1024;
      cnt  <= '0;
      acc  <= 0;
    end else if (in_valid && out_ready) begin
      cnt <= cnt + 1;
      if (&cnt) begin
        acc <= 0;
        if (!hold) begin
          if (mean * 16 > longint'(TARGET) * 17 && gain > 16'd16) gain <= gain - (gain >> 4);
          else if (mean * 16 < longint'(TARGET) * 15 && gain < 16'hf000) gain <= gain + (gain >> 4) + 16'd1;
        end
      end else begin
        acc <= acc + ar + ai;
      end
    end
  end
endmodule
