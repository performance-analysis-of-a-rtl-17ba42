// channel_estimator: least-squares estimate of the four channel frequency
// responses (paper Fig. 1 "Channel Frequency Responses", H11 .. H22).
//
// CE preamble 1 is sent by transmit antenna 1 alone and CE preamble 2 by
// antenna 2 alone (see frame_formatter), so per bin f, with the known pilot
// P[f] = (+-A, +-A) and |P|^2 = 2A^2 = 2^HSH * 2^14:
//   slot CEP1:  H11 = Y1 conj(P) / |P|^2,  H21 = Y2 conj(P) / |P|^2
//   slot CEP2:  H12 = Y1 conj(P) / |P|^2,  H22 = Y2 conj(P) / |P|^2
// (H_rx,tx in Q2.14). Bins without pilot get H = 0. Data blocks pass through
// unchanged to the space-time decoder, which reads the estimates through
// the rd_f port (combinational). The paper gives only the block's role;
// LS estimation per bin, without smoothing, is this design's choice.
// Valid/ready; the pilot replica stream is consumed in CE slots only.
module channel_estimator
  import gfdm_pkg::*;
#(
  parameter int unsigned N   = K_DEF * M_DEF,
  parameter int unsigned HSH = 9          // log2(2 A^2) - 14 for A = 2048
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  cplx_t                  in_y1, in_y2,
  input  slot_t                  in_slot,
  input  logic                   in_valid,
  output logic                   in_ready,
  input  cplx_t                  pilot,
  input  logic                   pilot_valid,
  output logic                   pilot_ready,
  output cplx_t                  out_y1, out_y2,
  output logic                   out_valid,
  input  logic                   out_ready,
  input  logic [$clog2(N)-1:0]   rd_f,
  output cplx_t                  h11, h12, h21, h22,
  output logic                   est_done   // pulses when CE preamble 2 is complete
);
  cplx_t H11 [N];
  cplx_t H12 [N];
  cplx_t H21 [N];
  cplx_t H22 [N];
  logic [$clog2(N+1)-1:0] f;
  logic ce;

  function automatic cplx_t ls(cplx_t y, cplx_t p);
    // y conj(p) = (yr pr + yi pi) + j (yi pr - yr pi)
    return '{re: sat((longint'(y.re) * p.re + longint'(y.im) * p.im) >>> HSH),
             im: sat((longint'(y.im) * p.re - longint'(y.re) * p.im) >>> HSH)};
  endfunction

  assign ce          = (in_slot == SLOT_CEP1) || (in_slot == SLOT_CEP2);
  assign pilot_ready = in_valid && ce;
  assign in_ready    = ce ? pilot_valid : out_ready;
  assign out_valid   = in_valid && !ce;
  assign out_y1      = in_y1;
  assign out_y2      = in_y2;
  assign h11 = H11[rd_f];
  assign h12 = H12[rd_f];
  assign h21 = H21[rd_f];
  assign h22 = H22[rd_f];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      f        <= '0;
      est_done <= 1'b0;
    end else begin
      est_done <= 1'b0;
      if (in_valid && in_ready) begin
        if (ce) begin
          if (in_slot == SLOT_CEP1) begin
            H11[f] <= ls(in_y1, pilot);
            H21[f] <= ls(in_y2, pilot);
          end else begin
            H12[f] <= ls(in_y1, pilot);
            H22[f] <= ls(in_y2, pilot);
          end
        end
        if (int'(f) == N - 1) begin
          f <= '0;
          if (in_slot == SLOT_CEP2) est_done <= 1'b1;
        end else f <= f + 1;
      end
    end
  end
endmodule
