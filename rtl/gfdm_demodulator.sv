// gfdm_demodulator: zero-forcing GFDM demodulation d = B y, B = A^-1, of one
// equalized block given in the frequency domain (Y = DFT_N(y)).
//
// In the frequency domain A splits into M independent K x K circulant
// filters (see gfdm_modulator): X[l + jM] = sum_k c_l[j-k] D_k[l]. Zero
// forcing inverts each of them and undoes the M-point DFT:
//   D_k[l]   = sum_t h_l[t] Y[l + <k-t>_K M],   h_l = circulant inverse of c_l
//   d_(k,m)  = (1/M) sum_l D_k[l] e^(+j 2 pi l m / M)
// The paper gives the ZF demodulator as eq. (5)-(6); the frequency-domain
// factorization and the truncation of h_l to 2T+1 taps (the inverse decays
// geometrically, by about 0.07 per tap for roll-off 0.5 and M = 3) are this
// design's. The taps are computed at elaboration with a 32-point DFT.
//
// Schedule: LOAD N bins; FILT (2T+1) cycles per (k,l); OUT M cycles per output
// symbol, symbols in grid order n = m*K + k. Valid/ready on both sides.
module gfdm_demodulator
  import gfdm_pkg::*;
#(
  parameter int unsigned K       = K_DEF,
  parameter int unsigned M       = M_DEF,
  parameter int unsigned ROF_PCT = 50,
  parameter int unsigned T       = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  cplx_t in_y,
  input  logic  in_valid,
  output logic  in_ready,
  output cplx_t out_sym,
  output logic  out_valid,
  output logic  out_last,
  input  logic  out_ready
);
  localparam int unsigned N  = K * M;
  localparam int unsigned NB = $clog2(N + 1);
  localparam int unsigned NT = 2 * T + 1;
  localparam int unsigned P  = 32;
  localparam real PI2 = 6.283185307179586;

  function automatic real g_spec(int f);
    real nu, a;
    a  = ROF_PCT / 100.0;
    nu = ((f < 0) ? -f : f) / real'(M);
    if (nu <= (1.0 - a) / 2.0) return 1.0;
    if (nu <= (1.0 + a) / 2.0) return 0.5 * (1.0 + $cos(3.141592653589793 / a * (nu - (1.0 - a) / 2.0)));
    return 0.0;
  endfunction

  typedef logic signed [SW-1:0] coef_t;
  typedef coef_t htab_t [M*NT];
  function automatic htab_t mk_h();
    htab_t h;
    real cre, cim, den, hre, him, acc;
    real inv_re [P];
    real inv_im [P];
    for (int l = 0; l < M; l++) begin
      for (int q = 0; q < P; q++) begin
        cre = 0.0; cim = 0.0;
        for (int t = -1; t <= 1; t++) begin
          cre += g_spec(l + t * M) * $cos(PI2 * t * q / P);
          cim -= g_spec(l + t * M) * $sin(PI2 * t * q / P);
        end
        den = cre * cre + cim * cim;
        inv_re[q] = cre / den;
        inv_im[q] = -cim / den;
      end
      for (int t = -int'(T); t <= int'(T); t++) begin
        acc = 0.0;
        for (int q = 0; q < P; q++)
          acc += inv_re[q] * $cos(PI2 * t * q / P) - inv_im[q] * $sin(PI2 * t * q / P);
        h[l * NT + t + T] = coef_t'($rtoi($floor(16384.0 * acc / P + 0.5)));
      end
    end
    return h;
  endfunction
  typedef coef_t wtab_t [M];
  function automatic wtab_t mk_cos();
    wtab_t w;
    for (int i = 0; i < M; i++) w[i] = cos_q(i, M);
    return w;
  endfunction
  function automatic wtab_t mk_sin();
    wtab_t w;
    for (int i = 0; i < M; i++) w[i] = sin_q(i, M);
    return w;
  endfunction
  localparam htab_t H    = mk_h();
  localparam wtab_t WCOS = mk_cos();
  localparam wtab_t WSIN = mk_sin();

  typedef enum logic [1:0] {LOAD, FILT, OUT} st_t;
  st_t st;

  cplx_t ybuf [N];
  cplx_t Ebuf [N];      // index k*M + l
  logic [NB-1:0] cnt;
  logic [$clog2(NT+1)-1:0] sub;
  longint acc_re, acc_im;

  int unsigned kk, ll, src, mm, tw;
  coef_t hc, wc, ws;
  cplx_t yv, ev;
  always_comb begin
    // FILT: cnt = k*M + l, tap t = sub - T
    kk  = int'(cnt) / M;
    ll  = int'(cnt) % M;
    src = (((kk + K * NT - (int'(sub) - T)) % K) * M + ll) % N;
    hc  = H[ll * NT + ((int'(sub) < NT) ? int'(sub) : 0)];
    yv  = ybuf[src];
    // OUT: cnt = m*K + k, l = sub
    mm  = int'(cnt) / K;
    tw  = (mm * int'(sub)) % M;
    wc  = WCOS[tw];
    ws  = WSIN[tw];
    ev  = Ebuf[((int'(cnt) % K) * M + ((int'(sub) < M) ? int'(sub) : 0)) % N];
  end

  assign in_ready    = (st == LOAD);
  assign out_valid   = (st == OUT) && (int'(sub) == M);
  assign out_sym.re  = sat((acc_re >>> QF) / longint'(M));
  assign out_sym.im  = sat((acc_im >>> QF) / longint'(M));
  assign out_last    = out_valid && (int'(cnt) == N - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= LOAD;
      cnt    <= '0;
      sub    <= '0;
      acc_re <= 0;
      acc_im <= 0;
    end else begin
      case (st)
        LOAD: if (in_valid) begin
          ybuf[cnt] <= in_y;
          if (int'(cnt) == N - 1) begin
            st  <= FILT;
            cnt <= '0;
            sub <= '0;
          end else cnt <= cnt + 1;
        end
        FILT: begin
          if (int'(sub) == NT - 1) begin
            Ebuf[cnt] <= '{re: sat((acc_re + longint'(yv.re) * hc) >>> QF),
                           im: sat((acc_im + longint'(yv.im) * hc) >>> QF)};
            acc_re <= 0;
            acc_im <= 0;
            sub    <= '0;
            if (int'(cnt) == N - 1) begin
              st  <= OUT;
              cnt <= '0;
            end else cnt <= cnt + 1;
          end else begin
            acc_re <= acc_re + longint'(yv.re) * hc;
            acc_im <= acc_im + longint'(yv.im) * hc;
            sub    <= sub + 1;
          end
        end
        default: begin // OUT: (a + jb)(c + js) = (ac - bs) + j(bc + as)
          if (int'(sub) < M) begin
            acc_re <= acc_re + longint'(ev.re) * wc - longint'(ev.im) * ws;
            acc_im <= acc_im + longint'(ev.im) * wc + longint'(ev.re) * ws;
            sub    <= sub + 1;
          end else if (out_ready) begin
            acc_re <= 0;
            acc_im <= 0;
            sub    <= '0;
            if (int'(cnt) == N - 1) begin
              st  <= LOAD;
              cnt <= '0;
            end else cnt <= cnt + 1;
          end
        end
      endcase
    end
  end
endmodule
