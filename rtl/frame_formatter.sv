// frame_formatter: builds the transmit frame of one antenna (paper Fig. 2d):
//   sync preamble | CE preamble 1 | CE preamble 2 | GFDM symbol 1 .. N_G
//
// It works on both sides of the antenna's IDFT and CP/window stage:
//  * frequency side: for each frame it feeds the IDFT with 2 + n_g blocks:
//    block 0 = CE preamble 1 (pilot on antenna 1, zeros on antenna 2),
//    block 1 = CE preamble 2 (zeros on antenna 1, pilot on antenna 2), then
//    n_g data blocks from the space-time coder. In MIMO mode every block is
//    scaled by 1/sqrt(2) so that the two antennas together send the power
//    of one (paper: half of the transmit power per antenna).
//  * time side: it sends the NSP-sample sync preamble, then the 2 + n_g
//    blocks of L = 2NW + NCP + N + NCS samples coming back from cp_window.
// Sending the CE preambles through the shared IDFT/CP path (rather than
// from a separate store), time-orthogonal CE preambles, and starting a
// frame in BDTM only when data is waiting are this design's choices. With
// mimo = 0 antenna 2 is silent. out_ce marks CE-preamble samples (used by the
// channel simulator's noiseless-estimation mode); out_sof marks the first
// sample of a frame. Valid/ready everywhere.
module frame_formatter
  import gfdm_pkg::*;
#(
  parameter int unsigned K   = K_DEF,
  parameter int unsigned M   = M_DEF,
  parameter int unsigned NCP = NCP_DEF,
  parameter int unsigned NCS = NCS_DEF,
  parameter int unsigned NW  = NW_DEF,
  parameter int unsigned NSP = 128,
  parameter int unsigned ANT = 1
) (
  input  logic       clk,
  input  logic       rst_n,
  input  dtm_t       dtm,
  input  logic       mimo,
  input  logic [7:0] n_g,
  // frequency side
  input  cplx_t      data_x,
  input  logic       data_valid,
  output logic       data_ready,
  input  cplx_t      pilot,
  input  logic       pilot_valid,
  output logic       pilot_ready,
  output cplx_t      fd_x,
  output logic       fd_valid,
  input  logic       fd_ready,
  output slot_t      fd_slot,
  // time side
  input  cplx_t      cp_x,
  input  logic       cp_valid,
  output logic       cp_ready,
  input  cplx_t      sync,
  input  logic       sync_valid,
  output logic       sync_ready,
  output cplx_t      out_x,
  output logic       out_valid,
  output logic       out_ce,
  output logic       out_sof,
  input  logic       out_ready
);
  localparam int unsigned N  = K * M;
  localparam int unsigned L  = 2 * NW + NCP + N + NCS;
  localparam int signed   INV_SQRT2 = 11585;   // Q2.14

  // ---------------- frequency side ----------------
  logic        fd_act, fd_mimo;
  logic [7:0]  fd_blk, fd_ng;
  logic [$clog2(N+1)-1:0] fd_f;
  cplx_t       fd_raw;
  logic        fd_start;
  logic [3:0]  pending;

  assign fd_start = !fd_act && (dtm == CDTM || data_valid) && pending != 4'hf;
  assign fd_slot  = (fd_blk == 0) ? SLOT_CEP1 : (fd_blk == 1) ? SLOT_CEP2 : SLOT_DATA;

  always_comb begin
    fd_raw      = '0;
    fd_valid    = 1'b0;
    data_ready  = 1'b0;
    pilot_ready = 1'b0;
    if (fd_act) begin
      if (fd_blk < 2) begin
        fd_raw      = (int'(fd_blk) == ANT - 1) ? pilot : '0;
        fd_valid    = pilot_valid;
        pilot_ready = fd_ready;
      end else begin
        fd_raw     = data_x;
        fd_valid   = data_valid;
        data_ready = fd_ready;
      end
    end
    if (ANT != 1 && !fd_mimo) fd_raw = '0;
    fd_x = fd_mimo ? '{re: sat((longint'(fd_raw.re) * INV_SQRT2) >>> QF),
                       im: sat((longint'(fd_raw.im) * INV_SQRT2) >>> QF)} : fd_raw;
  end

  // ---------------- time side ----------------
  typedef enum logic [1:0] {T_IDLE, T_SYNC, T_BLK} tst_t;
  tst_t        tst;
  logic        td_mimo;
  logic [7:0]  td_blk, td_ng;
  logic [$clog2(L+1)-1:0] td_i;
  logic [$clog2(NSP+1)-1:0] td_s;
  logic        td_done;
  cplx_t       td_raw;

  always_comb begin
    td_raw     = '0;
    out_valid  = 1'b0;
    sync_ready = 1'b0;
    cp_ready   = 1'b0;
    out_ce     = 1'b0;
    out_sof    = 1'b0;
    case (tst)
      T_SYNC: begin
        td_raw     = sync;
        out_valid  = sync_valid;
        sync_ready = out_ready;
        out_sof    = (td_s == 0);
      end
      T_BLK: begin
        td_raw    = cp_x;
        out_valid = cp_valid;
        cp_ready  = out_ready;
        out_ce    = td_blk < 2;
      end
      default: ;
    endcase
    out_x = (ANT != 1 && !td_mimo) ? '0 : td_raw;
  end
  assign td_done = (tst == T_BLK) && out_valid && out_ready &&
                   (int'(td_i) == L - 1) && (td_blk == td_ng + 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fd_act  <= 1'b0;
      fd_mimo <= 1'b0;
      fd_blk  <= '0;
      fd_ng   <= '0;
      fd_f    <= '0;
      pending <= '0;
      tst     <= T_IDLE;
      td_mimo <= 1'b0;
      td_blk  <= '0;
      td_ng   <= '0;
      td_i    <= '0;
      td_s    <= '0;
    end else begin
      // frequency side
      if (fd_start) begin
        fd_act  <= 1'b1;
        fd_mimo <= mimo;
        fd_ng   <= n_g;
        fd_blk  <= '0;
        fd_f    <= '0;
      end else if (fd_act && fd_valid && fd_ready) begin
        if (int'(fd_f) == N - 1) begin
          fd_f <= '0;
          if (fd_blk == fd_ng + 1) fd_act <= 1'b0;
          else fd_blk <= fd_blk + 1;
        end else fd_f <= fd_f + 1;
      end
      // frames started on the frequency side but not yet on the time side
      pending <= pending + (fd_start ? 4'd1 : 4'd0) - ((tst == T_IDLE && pending != 0) ? 4'd1 : 4'd0);
      // time side
      case (tst)
        T_IDLE: if (pending != 0) begin
          tst     <= T_SYNC;
          td_s    <= '0;
          td_mimo <= mimo;
          td_ng   <= n_g;
        end
        T_SYNC: if (out_valid && out_ready) begin
          if (int'(td_s) == NSP - 1) begin
            tst    <= T_BLK;
            td_blk <= '0;
            td_i   <= '0;
          end else td_s <= td_s + 1;
        end
        default: if (out_valid && out_ready) begin
          if (int'(td_i) == L - 1) begin
            td_i <= '0;
            if (td_done) tst <= T_IDLE;
            else td_blk <= td_blk + 1;
          end else td_i <= td_i + 1;
        end
      endcase
    end
  end
endmodule
