// smd_drp: SMD Deterministic RowHammer Protection (SMD-DRP) for one bank, the
// Graphene aggressor tracker moved into the DRAM chip.
//
// A Counter Table (CT) of CT_ENTRIES {row, counter} pairs and a spillover
// counter (SP) track the most frequently activated rows of the bank. For each
// accepted ACT of row R:
//   (1) look R up in the CT;
//   (2) on a hit, increment its counter;
//   (3) on a miss, find the smallest counter (min); if SP == min,
//   (4) replace that entry's row with R and increment its counter (to min+1);
//   (5) otherwise increment SP.
//   (6) When an incremented counter becomes a multiple of ACT_MAX,
//   (7) R's neighbours are refreshed (lock region, refresh, release).
// All counters and SP are cleared every TREFW_CYCLES (32 ms). With
// CT_ENTRIES > ACT_tREFW/ACT_MAX - 1 no row can be activated ACT_MAX times
// without a neighbour refresh (Graphene's guarantee); 1224 entries for
// ACT_MAX = 512 are the paper's numbers.
//
// The search is done LANES entries per cycle (39 cycles for 1224 entries at
// 32 lanes), shorter than the minimum ACT-to-ACT time of a bank (tRC, ~72
// cycles); ACTs wait in a 4-entry queue meanwhile, and aggressors wait in a
// 4-entry queue for the victim refresher. The table is LANES memories
// (one per lane) of ceil(CT_ENTRIES/LANES) words {row, counter}, so a chunk
// is one word of each; they have no reset and are cleared one word per lane
// per cycle (39 cycles) after reset and at every window reset, while ACTs
// wait in the queue. The lane-serial search, the queues,
// the first-match/first-minimum tie rules and the 20-bit counters are this
// design's choices; the algorithm is Graphene's as the paper describes it.
// Timing: an ACT's counter update happens ceil(CT_ENTRIES/LANES)+2 cycles
// after act_i.
module smd_drp
  import smd_pkg::*;
#(
  parameter int unsigned CT_ENTRIES   = 1224,
  parameter int unsigned ACT_MAX      = 512,
  parameter int unsigned LANES        = 32,
  parameter int unsigned TREFW_CYC    = smd_pkg::TREFW_CYCLES,
  parameter int unsigned BLAST        = 1,
  parameter int unsigned T_ROW_REF    = smd_pkg::ROW_REF_CYC,
  parameter int unsigned CNT_W        = 20
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      act_i,
  input  row_t      act_row_i,
  output lock_req_t lreq_o,
  input  lock_rsp_t lrsp_i,
  output mop_t      mop_o,
  output logic      trigger_o,     // (6) a counter reached a multiple of ACT_MAX
  output logic      served_o,      // (7) neighbour refresh finished
  output logic      act_drop_o,    // an ACT found the ACT queue full
  output logic [CNT_W-1:0] sp_o
);
  localparam int unsigned NCH   = (CT_ENTRIES + LANES - 1) / LANES;
  localparam int unsigned CH_W  = (NCH > 1) ? $clog2(NCH) : 1;
  localparam int unsigned IDX_W = $clog2(CT_ENTRIES);
  localparam int unsigned W_W   = $clog2(TREFW_CYC);


  // The Counter Table is LANES memories of NCH words each; entry
  // e = chunk*LANES + lane. One chunk (one word of every lane) is read per
  // cycle, one entry is written per cycle.
  typedef struct packed {
    row_t             row;
    logic [CNT_W-1:0] cnt;
  } ct_entry_t;

  ct_entry_t        rd_ent [LANES];
  logic             we;
  logic [IDX_W-1:0] wr_idx;
  ct_entry_t        wr_ent;
  logic             clr_we;          // clearing: write chunk ch_q of every lane

  logic [CNT_W-1:0] sp_q;
  logic [W_W-1:0]   win_q;
  logic             wrap;
  assign wrap = (win_q == W_W'(TREFW_CYC - 1));

  // ---------------- ACT queue ----------------
  row_t        aq [4];
  logic [2:0]  aq_n;
  logic        aq_pop;

  // ---------------- search state ----------------
  typedef enum logic [1:0] {S_CLEAR, S_IDLE, S_SEARCH, S_UPDATE} state_e;
  state_e           st_q;
  logic [CH_W-1:0]  ch_q;
  row_t             key_q;
  logic             key_v_q;        // a search was cut by a window reset
  logic             hit_q;
  logic [IDX_W-1:0] hit_idx_q, min_idx_q;
  logic [CNT_W-1:0] min_q, hit_cnt_q;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    ct_entry_t mem [NCH];
    logic      lane_we;
    assign lane_we = clr_we ||
                     (we && (IDX_W'(wr_idx % LANES) == IDX_W'(l)));
    always_ff @(posedge clk) begin
      if (lane_we) mem[clr_we ? ch_q : CH_W'(wr_idx / LANES)] <= clr_we ? '0 : wr_ent;
    end
    assign rd_ent[l] = mem[ch_q];
  end

  // per-cycle lane results
  logic             l_hit;
  logic [IDX_W-1:0] l_hit_idx, l_min_idx;
  logic [CNT_W-1:0] l_min, l_hit_cnt;
  always_comb begin
    l_hit     = 1'b0;
    l_hit_idx = '0;
    l_hit_cnt = '0;
    l_min     = '1;
    l_min_idx = '0;
    for (int l = LANES-1; l >= 0; l--) begin
      int unsigned e;
      e = 32'(ch_q) * LANES + 32'(l);
      if (e < CT_ENTRIES) begin
        if (rd_ent[l].row == key_q) begin
          l_hit     = 1'b1;
          l_hit_idx = IDX_W'(e);
          l_hit_cnt = rd_ent[l].cnt;
        end
        if (rd_ent[l].cnt <= l_min) begin
          l_min     = rd_ent[l].cnt;
          l_min_idx = IDX_W'(e);
        end
      end
    end
  end

  // ---------------- update decision ----------------
  logic             inc_entry;
  logic [IDX_W-1:0] upd_idx;
  logic [CNT_W-1:0] new_cnt;
  logic             trig;
  always_comb begin
    inc_entry = 1'b0;
    upd_idx   = hit_idx_q;
    new_cnt   = '0;
    if (st_q == S_UPDATE) begin
      if (hit_q) begin                                   // (2)
        inc_entry = 1'b1;
        new_cnt   = hit_cnt_q + 1'b1;
      end else if (sp_q == min_q) begin                  // (4)
        inc_entry = 1'b1;
        upd_idx   = min_idx_q;
        new_cnt   = min_q + 1'b1;
      end
    end
    trig = inc_entry && !wrap && ((32'(new_cnt) % ACT_MAX) == 0); // (6)
  end

  // ---------------- aggressor queue + victim refresher ----------------
  row_t       gq [4];
  logic [2:0] gq_n;
  logic       vr_busy, vr_done, vr_start;
  assign vr_start = (gq_n != '0) && !vr_busy;

  victim_refresher #(.BLAST(BLAST), .T_ROW_REF(T_ROW_REF)) u_vref (  // (7)
    .clk(clk), .rst_n(rst_n), .start_i(vr_start), .aggr_i(gq[0]),
    .busy_o(vr_busy), .done_o(vr_done), .lreq_o(lreq_o), .lrsp_i(lrsp_i), .mop_o(mop_o)
  );

  assign aq_pop = (st_q == S_IDLE) && (aq_n != '0);

  assign clr_we = (st_q == S_CLEAR);
  assign we     = inc_entry && !wrap;
  assign wr_idx = upd_idx;
  assign wr_ent = '{row: key_q, cnt: new_cnt};   // (2) same row, (4) new row

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sp_q      <= '0;
      win_q     <= '0;
      st_q      <= S_CLEAR;          // the table is cleared after reset
      ch_q      <= '0;
      key_q     <= '0;
      key_v_q   <= 1'b0;
      hit_q     <= 1'b0;
      hit_idx_q <= '0;
      hit_cnt_q <= '0;
      min_idx_q <= '0;
      min_q     <= '0;
      aq_n      <= '0;
      gq_n      <= '0;
      for (int i = 0; i < 4; i++) begin
        aq[i] <= '0;
        gq[i] <= '0;
      end
    end else begin
      win_q <= wrap ? '0 : win_q + 1'b1;

      // ACT queue
      begin
        logic [2:0] n;
        n = aq_n;
        if (aq_pop) begin
          for (int i = 0; i < 3; i++) aq[i] <= aq[i+1];
          n = n - 1'b1;
        end
        if (act_i && n != 3'd4) begin
          aq[n[1:0]] <= act_row_i;
          n = n + 1'b1;
        end
        aq_n <= n;
      end

      // search FSM
      unique case (st_q)
        S_CLEAR: begin
          if (ch_q == CH_W'(NCH - 1)) begin
            ch_q    <= '0;
            hit_q   <= 1'b0;
            min_q   <= '1;
            key_v_q <= 1'b0;
            st_q    <= key_v_q ? S_SEARCH : S_IDLE;
          end else ch_q <= ch_q + 1'b1;
        end
        S_IDLE: if (aq_pop) begin                          // (1)
          st_q  <= S_SEARCH;
          key_q <= aq[0];
          ch_q  <= '0;
          hit_q <= 1'b0;
          min_q <= '1;
        end
        S_SEARCH: begin
          if (l_hit && !hit_q) begin
            hit_q     <= 1'b1;
            hit_idx_q <= l_hit_idx;
            hit_cnt_q <= l_hit_cnt;
          end
          if (l_min < min_q) begin
            min_q     <= l_min;
            min_idx_q <= l_min_idx;
          end
          if (ch_q == CH_W'(NCH - 1)) st_q <= S_UPDATE;
          else                        ch_q <= ch_q + 1'b1;
        end
        S_UPDATE: st_q <= S_IDLE;
        default:  st_q <= S_IDLE;
      endcase

      if (st_q == S_UPDATE && !inc_entry) sp_q <= sp_q + 1'b1; // (5)

      // aggressor queue
      begin
        logic [2:0] n;
        n = gq_n;
        if (vr_start) begin
          for (int i = 0; i < 3; i++) gq[i] <= gq[i+1];
          n = n - 1'b1;
        end
        if (trig && n != 3'd4) begin
          gq[n[1:0]] <= key_q;
          n = n + 1'b1;
        end
        gq_n <= n;
      end

      // refresh-window reset: the table is cleared one chunk per cycle
      // (NCH cycles); a search in flight is redone afterwards
      if (wrap) begin
        sp_q    <= '0;
        st_q    <= S_CLEAR;
        ch_q    <= '0;
        key_v_q <= (st_q == S_SEARCH) || (st_q == S_UPDATE) ||
                   (st_q == S_CLEAR && key_v_q);
      end
    end
  end

  assign trigger_o  = trig;
  assign served_o   = vr_done;
  assign act_drop_o = act_i && (aq_n == 3'd4) && !aq_pop;
  assign sp_o       = sp_q;

  // SP never exceeds the smallest tracked counter (Graphene invariant)
  assert property (@(posedge clk) disable iff (!rst_n)
                   (st_q == S_UPDATE) |-> (sp_q <= min_q));
endmodule
