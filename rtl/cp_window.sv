// cp_window: adds cyclic prefix, cyclic suffix and time-window ramps to a
// GFDM block (paper Fig. 2c: N_w | N_CP | N | N_CS | N_w).
//
// For block x[0..N-1] the output is L = 2 NW + NCP + N + NCS samples:
//   x[N-NW-NCP .. N-1], x[0 .. N-1], x[0 .. NCS+NW-1]
// The first and the last NW samples are multiplied by a rising and a falling
// ramp. The paper gives the lengths (CP 32, CS 16, window 8 samples) and the
// window type "4th RC"; this design takes that as the fourth-order
// polynomial raised-cosine ramp p(t) = t^4 (35 - 84t + 70t^2 - 20t^3),
// sampled at t = (i + 0.5)/NW. Windows of neighbouring blocks are not
// overlapped. The block is stored, then sent (valid/ready both sides).
module cp_window
  import gfdm_pkg::*;
#(
  parameter int unsigned N   = K_DEF * M_DEF,
  parameter int unsigned NCP = NCP_DEF,
  parameter int unsigned NCS = NCS_DEF,
  parameter int unsigned NW  = NW_DEF
) (
  input  logic  clk,
  input  logic  rst_n,
  input  cplx_t in_x,
  input  logic  in_valid,
  output logic  in_ready,
  output cplx_t out_x,
  output logic  out_valid,
  output logic  out_last,
  input  logic  out_ready
);
  localparam int unsigned L  = 2 * NW + NCP + N + NCS;
  localparam int unsigned LB = $clog2(L + 1);
  typedef logic signed [SW-1:0] coef_t;
  typedef coef_t rtab_t [NW > 0 ? NW : 1];
  function automatic rtab_t mk_ramp();
    rtab_t r;
    real t;
    for (int i = 0; i < NW; i++) begin
      t = (i + 0.5) / NW;
      r[i] = coef_t'($rtoi($floor(16384.0 * t**4 * (35.0 - 84.0*t + 70.0*t*t - 20.0*t*t*t) + 0.5)));
    end
    return r;
  endfunction
  localparam rtab_t RAMP = mk_ramp();

  typedef enum logic {LOAD, SEND} st_t;
  st_t st;
  cplx_t buff [N];
  logic [LB-1:0] i;
  int unsigned src;
  coef_t w;
  cplx_t v;

  always_comb begin
    src = (int'(i) + N - NW - NCP) % N;
    v   = buff[src];
    if (int'(i) < NW) w = RAMP[int'(i) % (NW > 0 ? NW : 1)];
    else if (int'(i) >= L - NW) w = RAMP[(L - 1 - int'(i)) % (NW > 0 ? NW : 1)];
    else w = coef_t'(Q_ONE);
  end

  assign in_ready  = (st == LOAD);
  assign out_valid = (st == SEND);
  assign out_last  = out_valid && (int'(i) == L - 1);
  assign out_x.re  = sat((longint'(v.re) * w) >>> QF);
  assign out_x.im  = sat((longint'(v.im) * w) >>> QF);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= LOAD;
      i  <= '0;
    end else if (st == LOAD) begin
      if (in_valid) begin
        buff[i] <= in_x;
        if (int'(i) == N - 1) begin i <= '0; st <= SEND; end
        else i <= i + 1;
      end
    end else if (out_ready) begin
      if (int'(i) == L - 1) begin i <= '0; st <= LOAD; end
      else i <= i + 1;
    end
  end
endmodule
