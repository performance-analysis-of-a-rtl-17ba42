// tr_stc_encoder: frequency-domain time-reversal space-time code (TR-STC)
// for two transmit antennas.
//
// Two consecutive GFDM blocks a, b (frequency-domain, N bins each) are sent
// in two block slots:
//   slot 1: antenna 1 X_a,       antenna 2 X_b
//   slot 2: antenna 1 -conj(X_b), antenna 2 conj(X_a)
// A conjugate in the frequency domain is a conjugate plus circular time
// reversal in the time domain, hence the name. This is the Alamouti scheme
// the paper cites for its TR-STC; the paper itself gives only the block's
// purpose. With mimo = 0 (SISO) blocks pass to antenna 1 and antenna 2 sends
// zeros. The mode is sampled at the first bin of a block pair.
// Slot 1 leaves while block b arrives (no extra latency); slot 2 is read
// from the two block buffers. Valid/ready handshakes; both outputs share
// out_valid / out_ready.
module tr_stc_encoder
  import gfdm_pkg::*;
#(
  parameter int unsigned N = K_DEF * M_DEF
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  mimo,
  input  cplx_t in_x,
  input  logic  in_valid,
  output logic  in_ready,
  output cplx_t out_x1,
  output cplx_t out_x2,
  output logic  out_valid,
  input  logic  out_ready
);
  localparam int unsigned NB = $clog2(N + 1);
  typedef enum logic [1:0] {ST_A, ST_B, ST_S2} st_t;
  st_t st;
  logic mode;
  logic [NB-1:0] f;
  cplx_t bufa [N];
  cplx_t bufb [N];
  cplx_t va, vb;

  assign va = bufa[f];
  assign vb = bufb[f];

  function automatic cplx_t neg_conj(cplx_t v);
    return '{re: sat(-longint'(v.re)), im: v.im};
  endfunction
  function automatic cplx_t conj(cplx_t v);
    return '{re: v.re, im: sat(-longint'(v.im))};
  endfunction

  logic m_now;
  assign m_now = (st == ST_A && f == 0) ? mimo : mode;

  always_comb begin
    out_x1    = '0;
    out_x2    = '0;
    out_valid = 1'b0;
    in_ready  = 1'b0;
    if (!m_now) begin
      out_x1    = in_x;
      out_valid = in_valid;
      in_ready  = out_ready;
    end else begin
      case (st)
        ST_A: in_ready = 1'b1;
        ST_B: begin
          out_x1    = va;
          out_x2    = in_x;
          out_valid = in_valid;
          in_ready  = out_ready;
        end
        default: begin
          out_x1    = neg_conj(vb);
          out_x2    = conj(va);
          out_valid = 1'b1;
        end
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st   <= ST_A;
      mode <= 1'b0;
      f    <= '0;
    end else begin
      if (st == ST_A && f == 0) mode <= mimo;
      if (!m_now) begin
        if (in_valid && in_ready) f <= (int'(f) == N - 1) ? '0 : f + 1;
      end else begin
        case (st)
          ST_A: if (in_valid) begin
            bufa[f] <= in_x;
            if (int'(f) == N - 1) begin f <= '0; st <= ST_B; end
            else f <= f + 1;
          end
          ST_B: if (in_valid && out_ready) begin
            bufb[f] <= in_x;
            if (int'(f) == N - 1) begin f <= '0; st <= ST_S2; end
            else f <= f + 1;
          end
          default: if (out_ready) begin
            if (int'(f) == N - 1) begin f <= '0; st <= ST_A; end
            else f <= f + 1;
          end
        endcase
      end
    end
  end

  // a block pair is never abandoned half way
  a_mode_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (st != ST_A) |-> mode);
endmodule
