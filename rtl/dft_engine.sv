// dft_engine: N-point DFT (INVERSE = 0, receiver) or IDFT (INVERSE = 1,
// transmitter) of one block of complex samples.
//
// The paper names N-point (I)DFT blocks (N = K*M = 1536, not a power of two)
// and says nothing of their structure. This is the simplest exact form, a
// direct transform with one complex multiply-accumulate per clock:
//   X[k] = 2^-SHIFT * sum_n x[n] e^(-+j 2 pi n k / N)
// The twiddle index n*k mod N is advanced by k each cycle, so only a table of
// N Q2.14 cosines and sines (built at elaboration) is needed.
// Schedule: LOAD N inputs, then for each k = 0..N-1: N MAC cycles and one
// output handshake. A block takes about N*N + 2N cycles (2.4 M at N = 1536).
module dft_engine
  import gfdm_pkg::*;
#(
  parameter int unsigned N       = K_DEF * M_DEF,
  parameter bit          INVERSE = 1'b0,
  parameter int unsigned SHIFT   = 5,
  parameter int unsigned TAGW    = 2
) (
  input  logic  clk,
  input  logic  rst_n,
  input  cplx_t in_x,
  input  logic [TAGW-1:0] in_tag,   // side information, taken with the first sample
  input  logic  in_valid,
  output logic  in_ready,
  output cplx_t out_x,
  output logic [TAGW-1:0] out_tag,  // in_tag of the block being output
  output logic  out_valid,
  output logic  out_last,
  input  logic  out_ready
);
  localparam int unsigned NB = $clog2(N + 1);
  typedef logic signed [SW-1:0] coef_t;
  typedef coef_t tab_t [N];
  function automatic tab_t mk_cos();
    tab_t t;
    for (int i = 0; i < N; i++) t[i] = cos_q(i, N);
    return t;
  endfunction
  function automatic tab_t mk_sin();
    tab_t t;
    for (int i = 0; i < N; i++) t[i] = sin_q(i, N);
    return t;
  endfunction
  localparam tab_t WCOS = mk_cos();
  localparam tab_t WSIN = mk_sin();

  typedef enum logic [1:0] {LOAD, MAC, OUT} st_t;
  st_t st;
  cplx_t xbuf [N];
  logic [NB-1:0] n, k, idx;
  longint acc_re, acc_im;
  coef_t c, s;
  cplx_t xv;

  assign c  = WCOS[idx];
  assign s  = INVERSE ? WSIN[idx] : -WSIN[idx];
  assign xv = xbuf[n];

  assign in_ready  = (st == LOAD);
  assign out_valid = (st == OUT);
  assign out_last  = out_valid && (int'(k) == N - 1);
  assign out_x.re  = sat(acc_re >>> (QF + SHIFT));
  assign out_x.im  = sat(acc_im >>> (QF + SHIFT));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= LOAD;
      out_tag <= '0;
      n      <= '0;
      k      <= '0;
      idx    <= '0;
      acc_re <= 0;
      acc_im <= 0;
    end else begin
      case (st)
        LOAD: if (in_valid) begin
          xbuf[n] <= in_x;
          if (n == 0) out_tag <= in_tag;
          if (int'(n) == N - 1) begin
            st     <= MAC;
            n      <= '0;
            k      <= '0;
            idx    <= '0;
            acc_re <= 0;
            acc_im <= 0;
          end else n <= n + 1;
        end
        MAC: begin
          // (a + jb)(c + js) = (ac - bs) + j(bc + as)
          acc_re <= acc_re + longint'(xv.re) * c - longint'(xv.im) * s;
          acc_im <= acc_im + longint'(xv.im) * c + longint'(xv.re) * s;
          idx    <= (int'(idx) + int'(k) >= N) ? NB'(int'(idx) + int'(k) - N) : idx + k;
          if (int'(n) == N - 1) begin
            st <= OUT;
            n  <= '0;
          end else n <= n + 1;
        end
        default: if (out_ready) begin // OUT
          acc_re <= 0;
          acc_im <= 0;
          idx    <= '0;
          if (int'(k) == N - 1) begin
            st <= LOAD;
            k  <= '0;
          end else begin
            k  <= k + 1;
            st <= MAC;
          end
        end
      endcase
    end
  end
endmodule
