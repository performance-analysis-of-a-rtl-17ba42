// polar_decoder: successive-cancellation (SC) decoder of the shortened
// polar code produced by polar_encoder (channel decoding of the receiver).
//
// The paper uses SC decoding with shortening, N = 2048, 32 shortened bits.
// This is a serial SC decoder, the simplest form: one f or g node operation
// per clock. LLRs (positive = bit 0) of the N - S received code bits enter
// first; the S shortened positions are known zeros and get the largest
// positive LLR. Internal LLRs live in a heap-ordered array alpha[1..2N-1]
// (level l, node size 2^l, at indices 2^l .. 2^(l+1)-1; the channel is level
// n). For leaf i the decoder recomputes from level ctz(i)+1 down to level 0
//   f(a,b) = sign(a) sign(b) min(|a|,|b|)   (left child)
//   g(a,b,p) = b + (1 - 2p) a                (right child)
// decides the leaf (frozen -> 0, else sign), then folds the decided bits
// upward into partial sums: bl[] holds the re-encoded bits of the last
// completed left child of every level, br[] of the right child.
// Information bits leave in index order (out_valid/out_ready).
// Cycles per word: about N (load) + n*N (f/g) + n*N/2 (partial sums) + N.
module polar_decoder
  import gfdm_pkg::*;
#(
  parameter int unsigned N  = PN_DEF,
  parameter int unsigned S  = PSHORT_DEF,
  parameter int unsigned LW = 8     // LLR width
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  rate_t                rate,
  input  logic signed [LW-1:0] in_llr,
  input  logic                 in_valid,
  output logic                 in_ready,
  output logic                 out_bit,
  output logic                 out_valid,
  input  logic                 out_ready,
  output logic                 word_done   // pulses when a word is decoded
);
  localparam int unsigned LN = $clog2(N);
  localparam int signed LMAX = (1 << (LW - 1)) - 1;
  localparam pmask_t MASK0 = polar_info_mask(N, S, polar_k(N - S, R1_2));
  localparam pmask_t MASK1 = polar_info_mask(N, S, polar_k(N - S, R2_3));
  localparam pmask_t MASK2 = polar_info_mask(N, S, polar_k(N - S, R3_4));
  localparam pmask_t MASK3 = polar_info_mask(N, S, polar_k(N - S, R5_6));

  function automatic logic [N-1:0] mask_of(rate_t r);
    case (r)
      R1_2:    return MASK0[N-1:0];
      R2_3:    return MASK1[N-1:0];
      R3_4:    return MASK2[N-1:0];
      default: return MASK3[N-1:0];
    endcase
  endfunction

  typedef logic signed [LW-1:0] llr_t;

  typedef enum logic [2:0] {START, LOAD, CALC, LEAF, PSUM} st_t;
  st_t st;

  llr_t alpha [1:2*N-1];
  logic bl    [1:2*N-1];
  logic br    [1:2*N-1];
  logic [N-1:0] info;

  logic [LN:0]   ld;      // load counter
  logic [LN:0]   leaf;    // current leaf i
  logic [LN:0]   lvl;     // CALC: level being read; PSUM: level of finished node
  logic [LN-1:0] j;       // element within node
  logic          ubit;

  function automatic llr_t fsat(int v);
    if (v > LMAX) return llr_t'(LMAX);
    if (v < -LMAX) return llr_t'(-LMAX);
    return llr_t'(v);
  endfunction

  function automatic int unsigned ctz(logic [LN:0] v);
    for (int b = 0; b <= LN; b++) if (v[b]) return b;
    return LN;
  endfunction

  // CALC datapath
  int unsigned half, ia, ib, io;
  llr_t a, b;
  llr_t fout, gout;
  always_comb begin
    half = 1 << (lvl - 1);
    ia   = (1 << lvl) + j;
    ib   = ia + half;
    io   = half + j;
    a    = alpha[ia];
    b    = alpha[ib];
    fout = ((a < 0) ^ (b < 0)) ? -((a < 0 ? -a : a) < (b < 0 ? -b : b) ? (a < 0 ? -a : a) : (b < 0 ? -b : b))
                               :  ((a < 0 ? -a : a) < (b < 0 ? -b : b) ? (a < 0 ? -a : a) : (b < 0 ? -b : b));
    gout = bl[io] ? fsat(int'(b) - int'(a)) : fsat(int'(b) + int'(a));
  end

  assign in_ready  = (st == LOAD) && (ld < (LN+1)'(N - S));
  assign out_valid = (st == LEAF) && info[leaf[LN-1:0]];
  assign out_bit   = ubit;
  assign ubit      = alpha[1] < 0;

  // PSUM: node of size 2^lvl just completed as a right child; merge with
  // its left sibling into the parent (size 2^(lvl+1)).
  logic psum_last;
  assign psum_last = (j == LN'((1 << lvl) - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st        <= START;
      ld        <= '0;
      leaf      <= '0;
      lvl       <= '0;
      j         <= '0;
      info      <= '0;
      word_done <= 1'b0;
    end else begin
      word_done <= 1'b0;
      case (st)
        START: begin
          info <= mask_of(rate);
          ld   <= '0;
          st   <= LOAD;
        end
        LOAD: begin
          if (ld < (LN+1)'(N - S)) begin
            if (ld == 0 && !in_valid) info <= mask_of(rate);   // follow rate changes between words
            if (in_valid) begin
              alpha[N + int'(ld)] <= in_llr;
              ld <= ld + 1;
            end
          end else begin
            alpha[N + int'(ld)] <= llr_t'(LMAX);
            if (ld == (LN+1)'(N - 1)) begin
              st   <= CALC;
              leaf <= '0;
              lvl  <= (LN+1)'(LN);
              j    <= '0;
            end
            ld <= ld + 1;
          end
        end
        CALC: begin
          alpha[io] <= leaf[lvl-1] ? gout : fout;
          if (j == LN'(half - 1)) begin
            j <= '0;
            if (lvl == 1) st <= LEAF;
            lvl <= lvl - 1;
          end else begin
            j <= j + 1;
          end
        end
        LEAF: begin
          if (!info[leaf[LN-1:0]] || out_ready) begin
            if (!leaf[0]) begin
              bl[1] <= info[leaf[LN-1:0]] & ubit;
              leaf  <= leaf + 1;
              lvl   <= 1;
              j     <= '0;
              st    <= CALC;
            end else begin
              br[1] <= info[leaf[LN-1:0]] & ubit;
              lvl   <= '0;
              j     <= '0;
              st    <= PSUM;
            end
          end
        end
        default: begin // PSUM
          if (leaf[lvl+1] || lvl + 1 == LN) begin
            br[(2 << lvl) + int'(j)]              <= bl[(1 << lvl) + int'(j)] ^ br[(1 << lvl) + int'(j)];
            br[(2 << lvl) + (1 << lvl) + int'(j)] <= br[(1 << lvl) + int'(j)];
          end else begin
            bl[(2 << lvl) + int'(j)]              <= bl[(1 << lvl) + int'(j)] ^ br[(1 << lvl) + int'(j)];
            bl[(2 << lvl) + (1 << lvl) + int'(j)] <= br[(1 << lvl) + int'(j)];
          end
          if (psum_last) begin
            j <= '0;
            if (lvl + 1 == LN) begin
              // whole word decided
              word_done <= 1'b1;
              st        <= START;
            end else if (leaf[lvl+1]) begin
              lvl <= lvl + 1;               // parent is a right child too
            end else begin
              leaf <= leaf + 1;
              lvl  <= (LN+1)'(ctz(leaf + 1) + 1);
              st   <= CALC;
            end
          end else begin
            j <= j + 1;
          end
        end
      endcase
    end
  end
endmodule
