// smd_ms: SMD Memory Scrubbing (SMD-MS) for one bank.
//
// Built like SMD-FR: a pending scrub counter (PSC), incremented every
// T_SCRUB_INC cycles, and lock region / row address counters (LRC, RAC) that
// name the next row, {LRC, RAC}. While PSC > 0 the mechanism asks for a lock
// of all regions of the bank (scrubbing uses the bank's data path, shared by
// every region) and, once granted, scrubs one row:
//   activate the row (T_RCD cycles), then for each of its CW_PER_ROW on-die
//   ECC codewords: read it (T_BL cycles, cw_rd_o high); the ECC engine
//   reports on ecc_err_i, sampled on the last of those cycles, whether it
//   corrected an error; if so write the corrected codeword back (T_WB cycles,
//   cw_wr_o high); finally precharge (T_RP cycles) and release the lock.
// With no errors a row takes T_RCD + 128*T_BL + T_RP = 556 cycles (~350 ns,
// the paper's figure). LRC then increments, RAC increments when LRC wraps, and
// PSC decrements. The row with the most corrected codewords seen so far, and
// its count, are kept in a mode-status register (msr_row_o, msr_cnt_o) that
// the memory controller can read.
//
// Defaults: a 5-minute scrub period over 128K rows gives T_SCRUB_INC =
// 3,662,109 cycles; PSC saturates at 8 like SMD-FR's PRC; DDR4-3200 tRCD and
// tRP of 22 cycles. These conversions and the ECC handshake (an error flag
// valid on the last read cycle) are this design's choices.
module smd_ms
  import smd_pkg::*;
#(
  parameter int unsigned T_SCRUB_INC = 3_662_109,
  parameter int unsigned PSC_MAX     = 8,
  parameter int unsigned CW_PER_ROW  = 128,
  parameter int unsigned T_RCD       = 22,
  parameter int unsigned T_RP        = 22,
  parameter int unsigned T_BL        = 4,
  parameter int unsigned T_WB        = 16
) (
  input  logic      clk,
  input  logic      rst_n,
  output lock_req_t lreq_o,
  input  lock_rsp_t lrsp_i,
  output mop_t      mop_o,
  output logic      cw_rd_o,
  output logic      cw_wr_o,
  output row_t      cw_row_o,
  output logic [$clog2(CW_PER_ROW)-1:0] cw_col_o,
  input  logic      ecc_err_i,
  output row_t      msr_row_o,
  output logic [7:0] msr_cnt_o,
  output logic      op_done_o
);
  localparam int unsigned PSC_W = $clog2(PSC_MAX + 1);
  localparam int unsigned INC_W = $clog2(T_SCRUB_INC);
  localparam int unsigned CW_W  = $clog2(CW_PER_ROW);
  localparam int unsigned TMAX  = (T_RCD > T_RP ? (T_RCD > T_WB ? T_RCD : T_WB) : (T_RP > T_WB ? T_RP : T_WB));
  localparam int unsigned T_W   = $clog2(TMAX + 1);

  typedef enum logic [2:0] {S_IDLE, S_LOCK, S_RCD, S_RD, S_WB, S_RP, S_REL} state_e;
  state_e            st_q;
  logic [PSC_W-1:0]  psc_q;
  region_t           lrc_q;
  lrow_t             rac_q;
  logic [INC_W-1:0]  inc_q;
  logic [T_W-1:0]    t_q;
  logic [CW_W-1:0]   c_q;
  logic [7:0]        corr_q;
  row_t              msr_row_q;
  logic [7:0]        msr_cnt_q;

  logic tick, done, last_cw;
  row_t cur_row;
  assign tick    = (inc_q == INC_W'(T_SCRUB_INC - 1));
  assign done    = (st_q == S_REL);
  assign cur_row = {lrc_q, rac_q};
  assign last_cw = (c_q == CW_W'(CW_PER_ROW - 1));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q      <= S_IDLE;
      psc_q     <= '0;
      lrc_q     <= '0;
      rac_q     <= '0;
      inc_q     <= '0;
      t_q       <= '0;
      c_q       <= '0;
      corr_q    <= '0;
      msr_row_q <= '0;
      msr_cnt_q <= '0;
    end else begin
      inc_q <= tick ? '0 : inc_q + 1'b1;
      if (tick && !done && psc_q != PSC_W'(PSC_MAX)) psc_q <= psc_q + 1'b1;
      else if (!tick && done)                        psc_q <= psc_q - 1'b1;

      unique case (st_q)
        S_IDLE: if (psc_q != '0) st_q <= S_LOCK;
        S_LOCK: if (lrsp_i.granted) begin
                  st_q   <= S_RCD;
                  t_q    <= '0;
                  c_q    <= '0;
                  corr_q <= '0;
                end
        S_RCD: if (t_q == T_W'(T_RCD - 1)) begin
                 st_q <= S_RD;
                 t_q  <= '0;
               end else t_q <= t_q + 1'b1;
        S_RD: if (t_q == T_W'(T_BL - 1)) begin
                t_q <= '0;
                if (ecc_err_i) begin
                  st_q   <= S_WB;
                  if (corr_q != 8'hFF) corr_q <= corr_q + 1'b1;
                end else if (last_cw) st_q <= S_RP;
                else c_q <= c_q + 1'b1;
              end else t_q <= t_q + 1'b1;
        S_WB: if (t_q == T_W'(T_WB - 1)) begin
                t_q <= '0;
                if (last_cw) st_q <= S_RP;
                else begin
                  st_q <= S_RD;
                  c_q  <= c_q + 1'b1;
                end
              end else t_q <= t_q + 1'b1;
        S_RP: if (t_q == T_W'(T_RP - 1)) begin
                st_q <= S_REL;
                t_q  <= '0;
              end else t_q <= t_q + 1'b1;
        S_REL: begin
          st_q  <= S_IDLE;
          lrc_q <= lrc_q + 1'b1;
          if (lrc_q == region_t'(REGIONS - 1)) rac_q <= rac_q + 1'b1;
          if (corr_q > msr_cnt_q) begin
            msr_cnt_q <= corr_q;
            msr_row_q <= cur_row;
          end
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    lreq_o        = '0;
    lreq_o.req    = (st_q == S_LOCK);
    lreq_o.all    = 1'b1;
    lreq_o.region = lrc_q;
    lreq_o.rel    = (st_q == S_REL);
    mop_o.active  = (st_q == S_RCD) || (st_q == S_RD) || (st_q == S_WB);
    mop_o.row     = cur_row;
  end

  assign cw_rd_o   = (st_q == S_RD);
  assign cw_wr_o   = (st_q == S_WB);
  assign cw_row_o  = cur_row;
  assign cw_col_o  = c_q;
  assign msr_row_o = msr_row_q;
  assign msr_cnt_o = msr_cnt_q;
  assign op_done_o = done;
endmodule
