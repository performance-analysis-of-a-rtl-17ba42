// tr_stc_decoder: frequency-domain decoder of the time-reversal space-time
// code; combines both receive antennas and equalizes (paper Fig. 1
// "Freq. domain Time-Reversal space-time decod.").
//
// For a block pair received in slots 1 and 2 (Y_i^(s): antenna i, slot s),
// per bin, with H_ij from transmit antenna j to receive antenna i:
//   X_a = sum_i (conj(H_i1) Y_i^(1) + H_i2 conj(Y_i^(2))) / D
//   X_b = sum_i (conj(H_i2) Y_i^(1) - H_i1 conj(Y_i^(2))) / D
//   D   = sum_i (|H_i1|^2 + |H_i2|^2)
// which undoes tr_stc_encoder and gives the diversity of order 4 of the
// 2 x 2 scheme. In SISO mode (mimo = 0) X = conj(H11) Y_1 / |H11|^2 on antenna 1.
// The paper gives the function; the Alamouti combiner and the division by a
// combinational divider are this design's. Slot 1 is buffered; during slot 2
// X_a leaves at once and X_b is buffered and sent afterwards. Estimates are
// read through h_f (combinational). Valid/ready.
module tr_stc_decoder
  import gfdm_pkg::*;
#(
  parameter int unsigned N = K_DEF * M_DEF
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 mimo,
  input  cplx_t                in_y1, in_y2,
  input  logic                 in_valid,
  output logic                 in_ready,
  output logic [$clog2(N)-1:0] h_f,
  input  cplx_t                h11, h12, h21, h22,
  output cplx_t                out_x,
  output logic                 out_valid,
  input  logic                 out_ready
);
  localparam int unsigned NB = $clog2(N + 1);
  typedef enum logic [1:0] {ST_S1, ST_S2, ST_FLUSH} st_t;
  st_t st;
  logic mode;
  logic [NB-1:0] f;
  cplx_t b1 [N];      // slot-1 samples, antenna 1
  cplx_t b2 [N];      // slot-1 samples, antenna 2
  cplx_t xb [N];      // decoded X_b
  cplx_t s11, s12, xbv;

  typedef struct { longint re, im; } lc_t;
  function automatic lc_t cm(cplx_t a, cplx_t b, logic ca, logic cb);
    // (a or conj a) * (b or conj b)
    longint ar, ai, br, bi;
    ar = a.re; ai = ca ? -longint'(a.im) : longint'(a.im);
    br = b.re; bi = cb ? -longint'(b.im) : longint'(b.im);
    return '{re: ar * br - ai * bi, im: ar * bi + ai * br};
  endfunction
  function automatic cplx_t cdiv(longint nr, longint ni, longint d);
    if (d <= 0) return '0;
    return '{re: sat((nr <<< QF) / d), im: sat((ni <<< QF) / d)};
  endfunction

  logic m_now;
  assign m_now = (st == ST_S1 && f == 0) ? mimo : mode;
  assign h_f   = f[$clog2(N)-1:0];
  assign s11   = b1[f];
  assign s12   = b2[f];
  assign xbv   = xb[f];

  lc_t t1, t2, t3, t4, u1, u2, u3, u4;
  longint den, den1;
  cplx_t xa_mimo, xb_mimo, x_siso;
  always_comb begin
    den1   = longint'(h11.re) * h11.re + longint'(h11.im) * h11.im;
    den    = den1 + longint'(h12.re) * h12.re + longint'(h12.im) * h12.im
                  + longint'(h21.re) * h21.re + longint'(h21.im) * h21.im
                  + longint'(h22.re) * h22.re + longint'(h22.im) * h22.im;
    t1 = cm(h11, s11, 1'b1, 1'b0);      // conj(H11) Y1(1)
    t2 = cm(h12, in_y1, 1'b0, 1'b1);    // H12 conj(Y1(2))
    t3 = cm(h21, s12, 1'b1, 1'b0);      // conj(H21) Y2(1)
    t4 = cm(h22, in_y2, 1'b0, 1'b1);    // H22 conj(Y2(2))
    u1 = cm(h12, s11, 1'b1, 1'b0);      // conj(H12) Y1(1)
    u2 = cm(h11, in_y1, 1'b0, 1'b1);    // H11 conj(Y1(2))
    u3 = cm(h22, s12, 1'b1, 1'b0);      // conj(H22) Y2(1)
    u4 = cm(h21, in_y2, 1'b0, 1'b1);    // H21 conj(Y2(2))
    xa_mimo = cdiv(t1.re + t2.re + t3.re + t4.re, t1.im + t2.im + t3.im + t4.im, den);
    xb_mimo = cdiv(u1.re - u2.re + u3.re - u4.re, u1.im - u2.im + u3.im - u4.im, den);
    x_siso  = cdiv(cm(h11, in_y1, 1'b1, 1'b0).re, cm(h11, in_y1, 1'b1, 1'b0).im, den1);
  end

  always_comb begin
    out_x     = '0;
    out_valid = 1'b0;
    in_ready  = 1'b0;
    if (!m_now) begin
      out_x     = x_siso;
      out_valid = in_valid;
      in_ready  = out_ready;
    end else begin
      case (st)
        ST_S1: in_ready = 1'b1;
        ST_S2: begin
          out_x     = xa_mimo;
          out_valid = in_valid;
          in_ready  = out_ready;
        end
        default: begin
          out_x     = xbv;
          out_valid = 1'b1;
        end
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= ST_S1;
      mode <= 1'b0;
      f    <= '0;
    end else begin
      if (st == ST_S1 && f == 0) mode <= mimo;
      if (!m_now) begin
        if (in_valid && in_ready) f <= (int'(f) == N - 1) ? '0 : f + 1;
      end else begin
        case (st)
          ST_S1: if (in_valid) begin
            b1[f] <= in_y1;
            b2[f] <= in_y2;
            if (int'(f) == N - 1) begin f <= '0; st <= ST_S2; end
            else f <= f + 1;
          end
          ST_S2: if (in_valid && out_ready) begin
            xb[f] <= xb_mimo;
            if (int'(f) == N - 1) begin f <= '0; st <= ST_FLUSH; end
            else f <= f + 1;
          end
          default: if (out_ready) begin
            if (int'(f) == N - 1) begin f <= '0; st <= ST_S1; end
            else f <= f + 1;
          end
        endcase
      end
    end
  end
endmodule
