// smd_fr: SMD Fixed-Rate Refresh (SMD-FR) for one bank.
//
// Three counters drive it: the pending refresh counter (PRC), the lock region
// counter (LRC) and the row address counter (RAC). PRC is incremented once
// every T_REF_INC cycles and saturates at PRC_MAX (8, the number of refreshes
// DDR4 lets a controller postpone). While PRC > 0 the mechanism asks the lock
// controller, every cycle, for region LRC until the lock is granted. It then
// refreshes RG consecutive rows of that region, rows RAC .. RAC+RG-1 inside
// the region, one row every T_ROW_REF cycles (tRAS+tRP), releases the lock,
// increments LRC, advances RAC by RG when LRC wraps to 0, and decrements PRC.
// Consecutive operations therefore walk across all 16 regions before
// returning to a region, so no region stays locked for more than RG row
// refreshes.
//
// Defaults: RG = 8 and PRC_MAX = 8 are the paper's. T_REF_INC = 3125 cycles
// (1.953 us) is this design's derivation: 128K rows / RG = 16384 operations
// per 32 ms refresh window. T_ROW_REF = 80 cycles is the paper's ~50 ns.
//
// Interface: lreq_o/lrsp_i to the bank's lock controller; mop_o is the row
// being refreshed (active for RG*T_ROW_REF cycles per operation).
module smd_fr
  import smd_pkg::*;
#(
  parameter int unsigned RG        = 8,
  parameter int unsigned PRC_MAX   = 8,
  parameter int unsigned T_REF_INC = smd_pkg::REF_INC_CYC,
  parameter int unsigned T_ROW_REF = smd_pkg::ROW_REF_CYC
) (
  input  logic      clk,
  input  logic      rst_n,
  output lock_req_t lreq_o,
  input  lock_rsp_t lrsp_i,
  output mop_t      mop_o,
  output logic [$clog2(PRC_MAX+1)-1:0] prc_o,
  output region_t   lrc_o,
  output lrow_t     rac_o,
  output logic      op_done_o   // one-cycle pulse when an operation ends
);
  localparam int unsigned PRC_W = $clog2(PRC_MAX + 1);
  localparam int unsigned INC_W = $clog2(T_REF_INC);
  localparam int unsigned T_W   = $clog2(T_ROW_REF);
  localparam int unsigned RG_W  = (RG > 1) ? $clog2(RG) : 1;

  typedef enum logic [1:0] {S_IDLE, S_LOCK, S_REF, S_REL} state_e;
  state_e            st_q;
  logic [PRC_W-1:0]  prc_q;
  region_t           lrc_q;
  lrow_t             rac_q;
  logic [INC_W-1:0]  inc_q;
  logic [T_W-1:0]    t_q;
  logic [RG_W-1:0]   i_q;

  logic tick, done;
  assign tick = (inc_q == INC_W'(T_REF_INC - 1));
  assign done = (st_q == S_REL);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q  <= S_IDLE;
      prc_q <= '0;
      lrc_q <= '0;
      rac_q <= '0;
      inc_q <= '0;
      t_q   <= '0;
      i_q   <= '0;
    end else begin
      // (1) pending refresh counter
      inc_q <= tick ? '0 : inc_q + 1'b1;
      if (tick && !done && prc_q != PRC_W'(PRC_MAX)) prc_q <= prc_q + 1'b1;
      else if (!tick && done)                        prc_q <= prc_q - 1'b1;

      unique case (st_q)
        S_IDLE: if (prc_q != '0) st_q <= S_LOCK;                 // (2)
        S_LOCK: if (lrsp_i.granted) begin                        // (3)
                  st_q <= S_REF;
                  t_q  <= '0;
                  i_q  <= '0;
                end
        S_REF: begin
          if (t_q == T_W'(T_ROW_REF - 1)) begin
            t_q <= '0;
            if (i_q == RG_W'(RG - 1)) st_q <= S_REL;
            else                      i_q  <= i_q + 1'b1;
          end else begin
            t_q <= t_q + 1'b1;
          end
        end
        S_REL: begin                                             // (4)-(6)
          st_q  <= S_IDLE;
          lrc_q <= lrc_q + 1'b1;
          if (lrc_q == region_t'(REGIONS - 1)) rac_q <= rac_q + lrow_t'(RG);
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
    mop_o.active  = (st_q == S_REF);
    mop_o.row     = {lrc_q, rac_q + lrow_t'(i_q)};
  end

  assign prc_o     = prc_q;
  assign lrc_o     = lrc_q;
  assign rac_o     = rac_q;
  assign op_done_o = done;

  assert property (@(posedge clk) disable iff (!rst_n) (st_q != S_IDLE) |-> prc_q != '0);
endmodule
