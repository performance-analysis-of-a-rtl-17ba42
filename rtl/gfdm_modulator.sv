// gfdm_modulator: GFDM modulation x = A d of one block, computed in the
// frequency domain; the output is X = DFT_N(x), which the frequency-domain
// space-time coder and the N-point IDFT downstream expect.
//
// With N = K*M and a prototype pulse g whose spectrum is G,
//   X[l + jM] = sum_k c_l[<j-k>_K] D_k[l],   c_l[t] = G[<l + tM>_N],
//   D_k[l]    = sum_m d_(k,m) e^(-j 2 pi l m / M)   (M-point DFT per sub-carrier)
// which equals the DFT of eq. (1) of the paper. The pulse is a raised cosine
// with roll-off ROF_PCT/100 (paper: RC, roll-off 0.5), taken as a raised-cosine
// frequency response on the N-bin grid, sub-carrier spacing M bins; for
// roll-off <= 1 only taps t = -1, 0, +1 are non-zero. Coefficients are Q2.14
// and computed at elaboration.
//
// Schedule (one block at a time, valid/ready on both sides):
//   LOAD  N input symbols d, position n = m*K + k;
//   DFTM  N*M cycles, one complex MAC each, D_k[l];
//   OUT   3 cycles per output bin, bins f = 0..N-1 in order.
module gfdm_modulator
  import gfdm_pkg::*;
#(
  parameter int unsigned K       = K_DEF,
  parameter int unsigned M       = M_DEF,
  parameter int unsigned ROF_PCT = 50
) (
  input  logic  clk,
  input  logic  rst_n,
  input  cplx_t in_sym,
  input  logic  in_valid,
  output logic  in_ready,
  output cplx_t out_x,
  output logic  out_valid,
  output logic  out_last,
  input  logic  out_ready
);
  localparam int unsigned N = K * M;
  localparam int unsigned NB = $clog2(N + 1);

  // raised-cosine spectrum at bin offset f (sub-carrier spacing M bins)
  function automatic real g_spec(int f);
    real nu, a;
    a  = ROF_PCT / 100.0;
    nu = ((f < 0) ? -f : f) / real'(M);
    if (nu <= (1.0 - a) / 2.0) return 1.0;
    if (nu <= (1.0 + a) / 2.0) return 0.5 * (1.0 + $cos(3.141592653589793 / a * (nu - (1.0 - a) / 2.0)));
    return 0.0;
  endfunction

  typedef logic signed [SW-1:0] coef_t;
  typedef coef_t ctab_t [M*3];
  function automatic ctab_t mk_c();
    ctab_t c;
    for (int l = 0; l < M; l++)
      for (int t = -1; t <= 1; t++)
        c[l*3 + t + 1] = coef_t'($rtoi($floor(16384.0 * g_spec(l + t * M) + 0.5)));
    return c;
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
  localparam ctab_t C    = mk_c();
  localparam wtab_t WCOS = mk_cos();
  localparam wtab_t WSIN = mk_sin();

  typedef enum logic [1:0] {LOAD, DFTM, OUT} st_t;
  st_t st;

  cplx_t dbuf [N];
  cplx_t Dbuf [N];       // index k*M + l

  logic [NB-1:0] cnt;    // LOAD: n; DFTM: k*M+l; OUT: f
  logic [$clog2(M+1)-1:0] sub;   // DFTM: m; OUT: tap (0..2), 3 = result ready
  longint acc_re, acc_im;

  // DFTM operands
  int unsigned kk, ll, tw, jj, src;
  coef_t wc, ws, cc;
  cplx_t dv, Dv;
  always_comb begin
    kk  = int'(cnt) / M;
    ll  = int'(cnt) % M;
    tw  = (ll * int'(sub)) % M;
    wc  = WCOS[tw];
    ws  = WSIN[tw];
    dv  = dbuf[(int'(sub) * K + kk) % N];
    // OUT operands: f = cnt, l = f mod M, j = f div M, tap t = sub - 1
    jj  = int'(cnt) / M;
    src = (((jj + K - (int'(sub) - 1)) % K) * M + ll) % N;
    cc  = C[ll * 3 + ((sub > 2) ? 0 : int'(sub))];
    Dv  = Dbuf[src];
  end

  assign in_ready  = (st == LOAD);
  assign out_valid = (st == OUT) && (sub == 3);
  assign out_x.re  = sat(acc_re >>> QF);
  assign out_x.im  = sat(acc_im >>> QF);
  assign out_last  = out_valid && (int'(cnt) == N - 1);

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
          dbuf[cnt] <= in_sym;
          if (int'(cnt) == N - 1) begin
            st     <= DFTM;
            cnt    <= '0;
            sub    <= '0;
            acc_re <= 0;
            acc_im <= 0;
          end else cnt <= cnt + 1;
        end
        DFTM: begin
          // (a + jb)(c - js) = (ac + bs) + j(bc - as)
          if (int'(sub) == M - 1) begin
            Dbuf[cnt] <= '{re: sat((acc_re + longint'(dv.re) * wc + longint'(dv.im) * ws) >>> QF),
                           im: sat((acc_im + longint'(dv.im) * wc - longint'(dv.re) * ws) >>> QF)};
            acc_re <= 0;
            acc_im <= 0;
            sub    <= '0;
            if (int'(cnt) == N - 1) begin
              st  <= OUT;
              cnt <= '0;
            end else cnt <= cnt + 1;
          end else begin
            acc_re <= acc_re + longint'(dv.re) * wc + longint'(dv.im) * ws;
            acc_im <= acc_im + longint'(dv.im) * wc - longint'(dv.re) * ws;
            sub    <= sub + 1;
          end
        end
        default: begin // OUT
          if (sub < 3) begin
            acc_re <= acc_re + longint'(Dv.re) * cc;
            acc_im <= acc_im + longint'(Dv.im) * cc;
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
