`timescale 1ns/1ps
// tb_smd_system: end-to-end test of the SMD memory system: a memory
// controller front end (ACT_NACK handler) and 2 ranks of SMD chips sharing
// one ACT_NACK pin. Two systems run side by side, each with 2 chips per rank
// and shortened time constants (refresh op every 300 cycles, scrub op every
// 6000, DRP window 200000 cycles with 128 entries / ACT_MAX 16, which meets
// Graphene's sizing rule for the ~1000 ACTs per bank issued here):
//   s0: SMD-Combined (FR + DRP + MS), Precharge divergence policy;
//   s1: SMD-VR + SMD-PRP, Hybrid divergence policy (Wait when fewer than 2
//       other requests wait for the bank, else Precharge).
// A scheduler model drives each system: every cycle it picks a random rank
// and bank and issues a PRE if the handler asks for one, re-issues the
// waiting ACT once the handler allows it, closes a bank that has been open
// long enough, or opens a random row (hot rows at subarray edges half of the
// time) if the handler allows the ACT.
// Checks every cycle, on every bank of every chip:
//   - a region holding an MC row is never locked (maintenance never takes a
//     region the MC is using);
//   - every ACT_NACK pulse is matched to an ACT by the handler;
//   - an ACT that was not NACKed is open, with the right row, in every chip
//     of its rank;
// and at the end that each mechanism happened at least once: NACK, NACK of
// an ACT next to a locked region (open bitline), refresh, RowHammer
// mark/trigger and neighbour refresh, scrub (s0), lock refusal, NACK handled
// by Precharge, NACK handled by Wait (s1), and divergence (a NACKed ACT that
// some chips of the rank had accepted).
module tb_smd_system;
  import smd_pkg::*;
  localparam int RK = 2, CH = 2, RB = RK * BANKS;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  bit stop = 0;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s (t=%0t)", msg, $time); end
  endtask
  initial begin
    #50000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // event counters [system]
  int n_nack [2], n_adj [2], n_ref [2], n_trig [2], n_serve [2], n_scrub [2], n_cannot [2];
  int n_pre_pol [2], n_wait_pol [2], n_div [2], n_acc [2];

  for (genvar s = 0; s < 2; s++) begin : g_s
    cmd_t cmd; logic rank; logic [6:0] other [RB];
    logic q_rank; bank_t q_bank; row_t q_row; logic ok;
    logic need_pre [RB], wv [RB], tv [RB]; row_t wrow [RB]; region_t tr [RB];
    logic evt, evw, pin;
    ra_latch_t wl [RK][CH][BANKS][REGIONS]; logic [REGIONS-1:0] lrb [RK][CH][BANKS];
    logic rd [RK][CH][BANKS], wr [RK][CH][BANKS], err [RK][CH][BANKS];
    row_t crow [RK][CH][BANKS]; logic [6:0] ccol [RK][CH][BANKS];
    row_t mrow [RK][CH][BANKS]; logic [7:0] mcnt [RK][CH][BANKS]; logic [4:0] ev [RK][CH][BANKS];

    smd_system #(.RANKS(RK), .CHIPS(CH), .REF_MECH(s), .RH_MECH(s), .SCRUB_EN(s == 0),
                 .POLICY(s == 0 ? 0 : 2), .T_REF_INC(300), .T_SCRUB_INC(6000),
                 .TREFW_CYC(200000), .CT_ENTRIES(128), .ACT_MAX(16)) u (
      .clk, .rst_n, .cmd_i(cmd), .rank_i(rank), .other_reqs_i(other),
      .q_rank_i(q_rank), .q_bank_i(q_bank), .q_row_i(q_row), .act_ok_o(ok),
      .need_pre_o(need_pre), .wait_valid_o(wv), .wait_row_o(wrow), .trk_valid_o(tv), .trk_region_o(tr),
      .nack_evt_o(evt), .nack_wait_o(evw), .act_nack_o(pin),
      .wl_o(wl), .lrb_o(lrb), .cw_rd_o(rd), .cw_wr_o(wr), .cw_row_o(crow), .cw_col_o(ccol),
      .ecc_err_i(err), .msr_row_o(mrow), .msr_cnt_o(mcnt),
      .bf_ins_i(1'b0), .bf_rank_i(1'b0), .bf_chip_i(1'b0), .bf_bank_i('0), .bf_row_i('0), .ev_o(ev));
    always_comb
      for (int r = 0; r < RK; r++) for (int c = 0; c < CH; c++) for (int b = 0; b < BANKS; b++)
        err[r][c][b] = 1'b0;

    // scheduler state per (rank, bank): 0 closed, 1 ACT in NACK window, 2 open,
    // 3 PRE sent, 4 NACK being handled
    int st [RB]; row_t brow [RB]; int age [RB];
    int pend_rb [$]; int pend_t [$]; bit pend_adj [$];
    int cyc = 0;

    function automatic bit near_lock(int rb, row_t r);
      // subarray next to a locked region in some chip, region itself free
      int g, sa; bit adj, own;
      g = region_of(r); sa = int'(r[LROW_BITS-1:SA_BITS]); adj = 0; own = 0;
      for (int c = 0; c < CH; c++) begin
        logic [REGIONS-1:0] b;
        b = lrb[rb / BANKS][c][rb % BANKS];
        own |= b[g];
        if (sa == 0 && g > 0) adj |= b[g-1];
        if (sa == 15 && g < REGIONS - 1) adj |= b[g+1];
      end
      return adj && !own;
    endfunction

    initial begin
      cmd = '0; rank = 0; q_rank = 0; q_bank = '0; q_row = '0;
      foreach (other[i]) other[i] = '0;
      wait (rst_n);
      while (!stop) begin
        int rb, rk, bk;
        @(negedge clk);
        cyc++;
        cmd = '0;
        foreach (other[i]) other[i] = 7'($urandom_range(0, 3));
        rb = $urandom_range(0, RB - 1); rk = rb / BANKS; bk = rb % BANKS;
        rank = rk[0];
        q_rank = rk[0]; q_bank = bank_t'(bk);
        if (st[rb] == 1 || st[rb] == 4) continue;
        if (need_pre[rb] || (st[rb] == 2 && age[rb] > 12)) begin
          cmd = '{cmd: CMD_PRE, bank: bank_t'(bk), row: brow[rb], col: '0};
          st[rb] = 3;
        end else if (wv[rb]) begin
          q_row = wrow[rb]; #1;
          if (ok) begin
            cmd = '{cmd: CMD_ACT, bank: bank_t'(bk), row: wrow[rb], col: '0};
            pend_rb.push_back(rb); pend_t.push_back(cyc); pend_adj.push_back(near_lock(rb, wrow[rb]));
            st[rb] = 1; brow[rb] = wrow[rb];
          end
        end else if (st[rb] == 0) begin
          row_t r;
          if ($urandom_range(0, 1)) r = {region_t'($urandom_range(0, 1) * 9 + 3), 4'($urandom_range(0, 1) * 15), 9'($urandom_range(0, 3))};
          else r = row_t'($urandom);
          q_row = r; #1;
          if (ok) begin
            cmd = '{cmd: CMD_ACT, bank: bank_t'(bk), row: r, col: '0};
            pend_rb.push_back(rb); pend_t.push_back(cyc); pend_adj.push_back(near_lock(rb, r));
            st[rb] = 1; brow[rb] = r;
          end
        end
      end
      cmd = '0;
    end

    // monitor, just after each clock edge
    always @(posedge clk) if (rst_n) begin
      bit nacked, adj;
      #2;
      nacked = 0;
      // the handler acts on a NACK at the edge after the NACK cycle, so the
      // bank is handed back to the scheduler one cycle later (state 4)
      for (int rb = 0; rb < RB; rb++) if (st[rb] == 4) st[rb] = 0;
      if (pend_t.size() > 0 && cyc - pend_t[0] == T_NACK - 1) begin
        int rb;
        rb = pend_rb.pop_front(); void'(pend_t.pop_front()); adj = pend_adj.pop_front();
        nacked = pin;
        chk(!pin || evt, $sformatf("s%0d: ACT_NACK not matched", s));
        if (pin) begin
          int opened;
          n_nack[s]++;
          if (adj) n_adj[s]++;
          if (evw) n_wait_pol[s]++; else n_pre_pol[s]++;
          opened = 0;
          for (int c = 0; c < CH; c++)
            if (wl[rb / BANKS][c][rb % BANKS][region_of(brow[rb])].valid &&
                !wl[rb / BANKS][c][rb % BANKS][region_of(brow[rb])].maint) opened++;
          if (opened > 0) n_div[s]++;
          st[rb] = 4;
        end else begin
          n_acc[s]++;
          st[rb] = 2; age[rb] = 0;
          for (int c = 0; c < CH; c++) begin
            ra_latch_t l;
            l = wl[rb / BANKS][c][rb % BANKS][region_of(brow[rb])];
            chk(l.valid && !l.maint && l.lrow == lrow_t'(brow[rb]), $sformatf("s%0d chip %0d: accepted row not open", s, c));
          end
        end
      end
      if (!nacked) chk(!pin, $sformatf("s%0d: ACT_NACK with no ACT", s));
      for (int rb = 0; rb < RB; rb++) begin
        if (st[rb] == 3) st[rb] = 0;
        age[rb]++;
      end
      for (int r = 0; r < RK; r++) for (int c = 0; c < CH; c++) for (int b = 0; b < BANKS; b++) begin
        for (int g = 0; g < REGIONS; g++)
          if (wl[r][c][b][g].valid && !wl[r][c][b][g].maint)
            chk(!lrb[r][c][b][g], $sformatf("s%0d: region %0d locked under an open MC row", s, g));
      end
    end
    // one-cycle event pulses, sampled at the clock edge
    always @(posedge clk) if (rst_n) begin
      for (int r = 0; r < RK; r++) for (int c = 0; c < CH; c++) for (int b = 0; b < BANKS; b++) begin
        if (ev[r][c][b][4]) n_ref[s]++;
        if (ev[r][c][b][3]) n_trig[s]++;
        if (ev[r][c][b][2]) n_serve[s]++;
        if (ev[r][c][b][1]) n_scrub[s]++;
        if (ev[r][c][b][0]) n_cannot[s]++;
      end
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (100000) @(negedge clk);
    stop = 1;
    repeat (20) @(negedge clk);
    for (int s = 0; s < 2; s++) begin
      $display("s%0d: accepted=%0d nack=%0d adjacent_nack=%0d refresh=%0d rh_trig=%0d rh_served=%0d scrub=%0d cannot_lock=%0d precharge_policy=%0d wait_policy=%0d divergent=%0d",
               s, n_acc[s], n_nack[s], n_adj[s], n_ref[s], n_trig[s], n_serve[s], n_scrub[s], n_cannot[s],
               n_pre_pol[s], n_wait_pol[s], n_div[s]);
      chk(n_acc[s] > 0, "no accepted ACT");
      chk(n_nack[s] > 0, "no ACT_NACK");
      chk(n_adj[s] > 0, "no NACK next to a locked region");
      chk(n_ref[s] > 0, "no refresh");
      chk(n_trig[s] > 0, "no RowHammer trigger or mark");
      chk(n_serve[s] > 0, "no neighbour refresh");
      chk(n_cannot[s] > 0, "no lock refusal");
      chk(n_pre_pol[s] > 0, "no NACK handled by Precharge");
    end
    chk(n_scrub[0] > 0, "no scrub");
    chk(n_wait_pol[1] > 0, "no NACK handled by Wait");
    chk(n_wait_pol[0] == 0, "Wait used under the Precharge policy");
    chk(n_div[0] + n_div[1] > 0, "no divergent NACK");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
