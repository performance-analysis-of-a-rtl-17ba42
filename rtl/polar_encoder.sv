// polar_encoder: shortened polar encoder (channel coding of the transmitter).
//
// A code word of N = 2^n bits is x = u * F^(kron n), F = [1 0; 1 1]; the
// last S positions are shortened: their u bits are frozen to zero, which
// makes the matching code bits zero, so they are not sent. N - S bits go out
// per word and K = rate * (N - S) information bits come in (paper: N = 2048,
// S = 32, rates 1/2, 2/3, 3/4, 5/6; K = 1512 at rate 3/4). The information
// set is this design's choice (polarization-weight ranking, see gfdm_pkg).
//
// Operation, one word at a time:
//   LOAD  walks u[0..N-1]; information positions take the next input bit
//         (in_valid/in_ready handshake), frozen positions get 0;
//   ENC   n cycles, one butterfly stage of XORs per cycle;
//   SEND  the N - S code bits x[0..N-S-1] leave in index order
//         (out_valid/out_ready).
// The rate is sampled at the start of each word. Latency: about 2N + n cycles.
module polar_encoder
  import gfdm_pkg::*;
#(
  parameter int unsigned N = PN_DEF,
  parameter int unsigned S = PSHORT_DEF
) (
  input  logic  clk,
  input  logic  rst_n,
  input  rate_t rate,
  input  logic  in_bit,
  input  logic  in_valid,
  output logic  in_ready,
  output logic  out_bit,
  output logic  out_valid,
  input  logic  out_ready,
  output logic  word_start   // first input bit of a word is being accepted
);
  localparam int unsigned LN = $clog2(N);
  localparam pmask_t MASK0 = polar_info_mask(N, S, polar_k(N - S, R1_2));
  localparam pmask_t MASK1 = polar_info_mask(N, S, polar_k(N - S, R2_3));
  localparam pmask_t MASK2 = polar_info_mask(N, S, polar_k(N - S, R3_4));
  localparam pmask_t MASK3 = polar_info_mask(N, S, polar_k(N - S, R5_6));

  typedef enum logic [1:0] {START, LOAD, ENC, SEND} st_t;
  st_t st;
  logic [N-1:0] u;
  logic [N-1:0] info;
  logic [LN:0]  idx;
  logic [$clog2(LN+1)-1:0] stage;
  logic first;
  logic take;

  function automatic logic [N-1:0] mask_of(rate_t r);
    case (r)
      R1_2:    return MASK0[N-1:0];
      R2_3:    return MASK1[N-1:0];
      R3_4:    return MASK2[N-1:0];
      default: return MASK3[N-1:0];
    endcase
  endfunction

  assign in_ready   = (st == LOAD) && info[idx[LN-1:0]];
  assign out_valid  = (st == SEND);
  assign out_bit    = u[idx[LN-1:0]];
  assign word_start = in_valid && in_ready && first;
  // advance over a frozen position, or over an information position whose bit arrives
  assign take       = !info[idx[LN-1:0]] || in_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st    <= START;
      idx   <= '0;
      stage <= '0;
      u     <= '0;
      info  <= '0;
      first <= 1'b1;
    end else begin
      case (st)
        START: begin
          info  <= mask_of(rate);
          idx   <= '0;
          first <= 1'b1;
          st    <= LOAD;
        end
        // until the first information bit arrives the word may still be
        // restarted, so a rate change between words takes effect
        LOAD: if (first && !in_valid) begin
          st <= START;
        end else if (take) begin
          u[idx[LN-1:0]] <= info[idx[LN-1:0]] ? in_bit : 1'b0;
          if (info[idx[LN-1:0]]) first <= 1'b0;
          if (idx == (LN+1)'(N - 1)) begin
            st    <= ENC;
            stage <= '0;
          end else begin
            idx <= idx + 1;
          end
        end
        ENC: begin
          for (int j = 0; j < N; j++)
            if (((j >> stage) & 1) == 0) u[j] <= u[j] ^ u[(j + (1 << stage)) % N];
          if (stage == LN - 1) begin
            st  <= SEND;
            idx <= '0;
          end else begin
            stage <= stage + 1;
          end
        end
        default: begin // SEND
          if (out_ready) begin
            if (idx == (LN+1)'(N - S - 1)) st <= START;
            else idx <= idx + 1;
          end
        end
      endcase
    end
  end
endmodule
