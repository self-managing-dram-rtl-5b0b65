// smd_vr: SMD Variable Refresh (SMD-VR) for one bank.
//
// SMD-VR is SMD-FR with two retention bins. Rows listed in the bank's Bloom
// filter (retention-weak rows, retention < 128 ms) are refreshed every time
// the counters reach them; all other rows only in refresh periods whose
// refresh cycle counter (RCC) is a multiple of VR_FACTOR (128 ms / 32 ms = 4).
// RCC is incremented each time LRC and RAC have walked the whole bank.
//
// One operation, started when the pending refresh counter (PRC) is non-zero:
//   (2a/2b) the RG rows {LRC, RAC..RAC+RG-1} are marked, one row per cycle:
//           all of them if RCC % VR_FACTOR == 0, else only Bloom-filter hits;
//   (3)     if any row is marked, region LRC is requested every cycle until
//           the lock controller grants it;
//   (4)     each marked row is refreshed for T_ROW_REF cycles (unmarked rows
//           are skipped in one cycle);
//   (5)     the lock is released;
//   (6)     LRC is incremented, RAC advances by RG when LRC wraps and RCC when
//           RAC wraps too;
//   (7)     PRC is decremented.
// If no row is marked the region is not locked at all.
// Timing and counter widths are as in smd_fr; the one-row-per-cycle Bloom
// filter test is this design's choice.
module smd_vr
  import smd_pkg::*;
#(
  parameter int unsigned RG        = 8,
  parameter int unsigned PRC_MAX   = 8,
  parameter int unsigned VR_FACTOR = 4,
  parameter int unsigned T_REF_INC = smd_pkg::REF_INC_CYC,
  parameter int unsigned T_ROW_REF = smd_pkg::ROW_REF_CYC,
  parameter int unsigned BF_BITS   = 8192,
  parameter int unsigned HASHES    = 6
) (
  input  logic      clk,
  input  logic      rst_n,
  output lock_req_t lreq_o,
  input  lock_rsp_t lrsp_i,
  output mop_t      mop_o,
  input  logic      bf_ins_i,     // manufacturing-test insertion of a weak row
  input  row_t      bf_row_i,
  output logic [$clog2(PRC_MAX+1)-1:0] prc_o,
  output logic [$clog2(VR_FACTOR)-1:0] rcc_o,
  output logic      op_done_o,    // operation ended (with or without refresh)
  output logic      skipped_o     // operation ended without locking (nothing marked)
);
  localparam int unsigned PRC_W = $clog2(PRC_MAX + 1);
  localparam int unsigned INC_W = $clog2(T_REF_INC);
  localparam int unsigned T_W   = $clog2(T_ROW_REF);
  localparam int unsigned RG_W  = (RG > 1) ? $clog2(RG) : 1;
  localparam int unsigned RCC_W = (VR_FACTOR > 1) ? $clog2(VR_FACTOR) : 1;

  typedef enum logic [2:0] {S_IDLE, S_TEST, S_DECIDE, S_LOCK, S_REF, S_REL, S_ADV} state_e;
  state_e            st_q;
  logic [PRC_W-1:0]  prc_q;
  region_t           lrc_q;
  lrow_t             rac_q;
  logic [RCC_W-1:0]  rcc_q;
  logic [INC_W-1:0]  inc_q;
  logic [T_W-1:0]    t_q;
  logic [RG_W-1:0]   i_q;
  logic [RG-1:0]     mark_q;
  logic              locked_q;   // this operation took the lock

  row_t cur_row;
  logic bf_hit, tick, done, full_cycle;
  assign cur_row    = {lrc_q, rac_q + lrow_t'(i_q)};
  assign tick       = (inc_q == INC_W'(T_REF_INC - 1));
  assign done       = (st_q == S_ADV);
  assign full_cycle = (rcc_q == '0);

  bloom_filter #(.BF_BITS(BF_BITS), .HASHES(HASHES)) u_bf (
    .clk(clk), .rst_n(rst_n), .ins_i(bf_ins_i), .ins_row_i(bf_row_i),
    .q_row_i(cur_row), .hit_o(bf_hit)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q     <= S_IDLE;
      prc_q    <= '0;
      lrc_q    <= '0;
      rac_q    <= '0;
      rcc_q    <= '0;
      inc_q    <= '0;
      t_q      <= '0;
      i_q      <= '0;
      mark_q   <= '0;
      locked_q <= 1'b0;
    end else begin
      inc_q <= tick ? '0 : inc_q + 1'b1;                                   // (1)
      if (tick && !done && prc_q != PRC_W'(PRC_MAX)) prc_q <= prc_q + 1'b1;
      else if (!tick && done)                        prc_q <= prc_q - 1'b1; // (7)

      unique case (st_q)
        S_IDLE: if (prc_q != '0) begin
                  st_q     <= S_TEST;
                  i_q      <= '0;
                  locked_q <= 1'b0;
                end
        S_TEST: begin                                                      // (2a)/(2b)
          mark_q[i_q] <= full_cycle || bf_hit;
          if (i_q == RG_W'(RG - 1)) st_q <= S_DECIDE;
          else                      i_q  <= i_q + 1'b1;
        end
        S_DECIDE: st_q <= (mark_q != '0) ? S_LOCK : S_ADV;
        S_LOCK: if (lrsp_i.granted) begin                                  // (3)
                  st_q     <= S_REF;
                  locked_q <= 1'b1;
                  t_q      <= '0;
                  i_q      <= '0;
                end
        S_REF: begin                                                       // (4)
          if (!mark_q[i_q] || t_q == T_W'(T_ROW_REF - 1)) begin
            t_q <= '0;
            if (i_q == RG_W'(RG - 1)) st_q <= S_REL;
            else                      i_q  <= i_q + 1'b1;
          end else begin
            t_q <= t_q + 1'b1;
          end
        end
        S_REL: st_q <= S_ADV;                                              // (5)
        S_ADV: begin                                                       // (6)
          st_q  <= S_IDLE;
          lrc_q <= lrc_q + 1'b1;
          if (lrc_q == region_t'(REGIONS - 1)) begin
            rac_q <= rac_q + lrow_t'(RG);
            if (rac_q == lrow_t'((1 << LROW_BITS) - RG))
              rcc_q <= (rcc_q == RCC_W'(VR_FACTOR - 1)) ? '0 : rcc_q + 1'b1;
          end
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    lreq_o        = '0;
    lreq_o.req    = (st_q == S_LOCK);
    lreq_o.region = lrc_q;
    lreq_o.rel    = (st_q == S_REL);
    mop_o.active  = (st_q == S_REF) && mark_q[i_q];
    mop_o.row     = cur_row;
  end

  assign prc_o     = prc_q;
  assign rcc_o     = rcc_q;
  assign op_done_o = done;
  assign skipped_o = done && !locked_q;
endmodule
