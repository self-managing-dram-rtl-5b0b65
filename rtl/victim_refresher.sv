// victim_refresher: neighbour-row refresh engine shared by the RowHammer
// mechanisms (SMD-PRP and SMD-DRP).
//
// On start_i with an aggressor row it asks the lock controller for the
// aggressor's lock region every cycle until granted, refreshes the 2*BLAST
// neighbour rows (aggressor-1, aggressor+1, aggressor-2, ...) for T_ROW_REF
// cycles each, releases the lock and pulses done_o. Neighbours that fall
// outside the aggressor's subarray are skipped (one cycle each): rows of
// another subarray do not share the aggressor's bitlines. BLAST = 1 (the two
// adjacent rows) is the paper's default; skipping across subarray boundaries
// is this design's choice.
// Interface: busy_o is high from start_i until done_o; start_i is ignored
// while busy.
module victim_refresher
  import smd_pkg::*;
#(
  parameter int unsigned BLAST     = 1,
  parameter int unsigned T_ROW_REF = smd_pkg::ROW_REF_CYC
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start_i,
  input  row_t      aggr_i,
  output logic      busy_o,
  output logic      done_o,
  output lock_req_t lreq_o,
  input  lock_rsp_t lrsp_i,
  output mop_t      mop_o
);
  localparam int unsigned NV  = 2 * BLAST;
  localparam int unsigned K_W = (NV > 1) ? $clog2(NV) : 1;
  localparam int unsigned T_W = $clog2(T_ROW_REF);

  typedef enum logic [1:0] {S_IDLE, S_LOCK, S_REF, S_REL} state_e;
  state_e         st_q;
  row_t           aggr_q;
  logic [K_W-1:0] k_q;
  logic [T_W-1:0] t_q;

  // k-th victim: distance k/2+1, below for even k, above for odd k
  row_t victim;
  logic in_sa;
  always_comb begin
    logic [ROW_BITS:0] v;
    if (k_q[0]) v = {1'b0, aggr_q} + (ROW_BITS+1)'(32'(k_q) / 2 + 1);
    else        v = {1'b0, aggr_q} - (ROW_BITS+1)'(32'(k_q) / 2 + 1);
    victim = row_t'(v);
    in_sa  = !v[ROW_BITS] && (subarray_of(victim) == subarray_of(aggr_q));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q   <= S_IDLE;
      aggr_q <= '0;
      k_q    <= '0;
      t_q    <= '0;
    end else begin
      unique case (st_q)
        S_IDLE: if (start_i) begin
                  st_q   <= S_LOCK;
                  aggr_q <= aggr_i;
                end
        S_LOCK: if (lrsp_i.granted) begin
                  st_q <= S_REF;
                  k_q  <= '0;
                  t_q  <= '0;
                end
        S_REF: begin
          if (!in_sa || t_q == T_W'(T_ROW_REF - 1)) begin
            t_q <= '0;
            if (k_q == K_W'(NV - 1)) st_q <= S_REL;
            else                     k_q  <= k_q + 1'b1;
          end else begin
            t_q <= t_q + 1'b1;
          end
        end
        S_REL: st_q <= S_IDLE;
        default: st_q <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    lreq_o        = '0;
    lreq_o.req    = (st_q == S_LOCK);
    lreq_o.region = region_of(aggr_q);
    lreq_o.rel    = (st_q == S_REL);
    mop_o.active  = (st_q == S_REF) && in_sa;
    mop_o.row     = victim;
  end
  assign busy_o = (st_q != S_IDLE);
  assign done_o = (st_q == S_REL);
endmodule
