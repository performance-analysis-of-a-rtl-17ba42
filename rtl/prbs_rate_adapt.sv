// prbs_rate_adapt: transmit data source and rate adaptation (paper Fig. 1
// "Data/PRBS / Rate Adapt.").
//
// User bits enter a FIFO of FIFO_DEPTH bits. For every polar code word the
// block emits a PHY payload of K_L = rate * (N - S) bits:
//  * prbs_en = 1: K_L bits of an internal PRBS-15 (for BER measurements);
//  * otherwise: a 16-bit header holding U (MSB first), U user bits from the
//    FIFO, U = min(FIFO fill, K_L - 16) taken at the payload start, then
//    K_L - 16 - U stuffing bits (zeros).
// In CDTM payloads follow each other continuously (stuffing fills what the
// user did not supply). In BDTM a frame's worth of payloads (n_fec) is sent
// only once user data is waiting; between such bursts nothing is sent.
// The paper states that stuffing adapts the rate in CDTM and that a PRBS
// can be selected; the header that tells the receiver where the stuffing
// starts, the PRBS polynomial and the FIFO are this design's choices.
// out_stuff flags stuffing bits; out_first flags the first bit of a payload.
module prbs_rate_adapt
  import gfdm_pkg::*;
#(
  parameter int unsigned PN         = PN_DEF,
  parameter int unsigned PS         = PSHORT_DEF,
  parameter int unsigned FIFO_DEPTH = 4096
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       prbs_en,
  input  dtm_t       dtm,
  input  rate_t      rate,
  input  logic [7:0] n_fec,
  input  logic       in_bit,
  input  logic       in_valid,
  output logic       in_ready,
  output logic       out_bit,
  output logic       out_valid,
  output logic       out_stuff,
  output logic       out_first,
  input  logic       out_ready
);
  localparam int unsigned AW = $clog2(FIFO_DEPTH);
  logic fifo [FIFO_DEPTH];
  logic [AW-1:0] wp, rp;
  logic [AW:0]   fill;
  logic push, pop;

  typedef enum logic [1:0] {IDLE, HDR, DATA} st_t;
  st_t st;
  logic [15:0] u_cnt, pos, kl;
  logic        prbs_mode;
  logic [14:0] prbs;
  logic [7:0]  burst;   // payloads left in the current BDTM burst
  logic        start;

  assign push     = in_valid && in_ready;
  assign in_ready = (fill < (AW+1)'(FIFO_DEPTH));
  assign start    = (st == IDLE) && (prbs_en || dtm == CDTM || burst != 0 || fill != 0);

  always_comb begin
    out_bit   = 1'b0;
    out_stuff = 1'b0;
    out_valid = (st != IDLE);
    out_first = (st != IDLE) && pos == 0;
    pop       = 1'b0;
    if (st == HDR) begin
      out_bit = u_cnt[15 - pos[3:0]];
    end else if (st == DATA) begin
      if (prbs_mode) out_bit = prbs[14];
      else if (pos < u_cnt + 16) begin
        out_bit = fifo[rp];
        pop     = out_ready;
      end else out_stuff = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp        <= '0;
      rp        <= '0;
      fill      <= '0;
      st        <= IDLE;
      u_cnt     <= '0;
      pos       <= '0;
      kl        <= '0;
      prbs_mode <= 1'b0;
      prbs      <= 15'h7fff;
      burst     <= '0;
    end else begin
      if (push) begin
        fifo[wp] <= in_bit;
        wp <= wp + 1;
      end
      if (pop) rp <= rp + 1;
      fill <= fill + (push ? 1 : 0) - (pop ? 1 : 0);
      case (st)
        IDLE: if (start) begin
          kl        <= 16'(polar_k(PN - PS, rate));
          prbs_mode <= prbs_en;
          pos       <= '0;
          u_cnt     <= (int'(fill) < polar_k(PN - PS, rate) - 16) ? 16'(fill) : 16'(polar_k(PN - PS, rate) - 16);
          st        <= prbs_en ? DATA : HDR;
          if (!prbs_en && dtm == BDTM) burst <= (burst == 0) ? n_fec - 1 : burst - 1;
        end
        HDR: if (out_ready) begin
          pos <= pos + 1;
          if (pos == 15) st <= DATA;
        end
        default: if (out_ready) begin
          if (prbs_mode) prbs <= prbs15_next(prbs);
          if (pos == kl - 1) st <= IDLE;
          else pos <= pos + 1;
        end
      endcase
    end
  end
endmodule
