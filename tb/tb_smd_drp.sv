`timescale 1ns/1ps
// tb_smd_drp: self-checking test of SMD-DRP (Graphene in the DRAM chip).
// A scaled configuration (64 CT entries, ACT_MAX 64, 8 lanes, 100000-cycle
// refresh window) keeps the run short while exercising the same logic as the
// paper's 1224 entries / 512. About 3300 ACTs (one per 9-15 cycles, about
// one per tRC) are issued per window, so
// the table meets Graphene's sizing rule (entries > ACTs/ACT_MAX - 1) as the
// paper's configuration does. The testbench runs its own Graphene model with
// the same tie rules (lowest index wins for a hit and for the minimum) and
// checks:
//   - the sequence of trigger rows equals the model's;
//   - the spillover counter equals the model's once the ACT queue drains;
//   - Graphene's guarantee: a row activated N times in a window with T
//     triggers has N < (T+1)*ACT_MAX + SP;
//   - every trigger is served by refreshing row-1 and row+1 under the lock
//     of the aggressor's region;
//   - the refresh-window reset clears the counters and SP: a row activated
//     ACT_MAX-1 times before the reset and ACT_MAX-1 times after it is not
//     triggered after the reset.
module tb_smd_drp;
  import smd_pkg::*;
  localparam int unsigned E = 64, AM = 64, LN = 8, WIN = 100000;
  logic clk = 0, rst_n = 0;
  logic act; row_t arow;
  lock_req_t lreq; lock_rsp_t lrsp; mop_t mop;
  logic trig, served, drop; logic [19:0] sp;
  int checks = 0, failures = 0;

  smd_drp #(.CT_ENTRIES(E), .ACT_MAX(AM), .LANES(LN), .TREFW_CYC(WIN), .T_ROW_REF(4)) dut (
    .clk, .rst_n, .act_i(act), .act_row_i(arow), .lreq_o(lreq), .lrsp_i(lrsp), .mop_o(mop),
    .trigger_o(trig), .served_o(served), .act_drop_o(drop), .sp_o(sp));
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s (t=%0t)", msg, $time); end
  endtask
  initial begin
    #20000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // lock model
  logic locked = 0; region_t lreg;
  always @(posedge clk) begin
    lrsp <= '0;
    if (lreq.req && !locked && !lrsp.granted) begin lrsp.granted <= 1; locked <= 1; lreg <= lreq.region; end
    if (lreq.rel || !rst_n) locked <= 0;
  end

  // Graphene reference model
  int m_row [E]; int m_cnt [E]; int m_sp;
  int exp_trig [$];
  int acts_in_win [int];
  int trig_in_win [int];
  int n_trig = 0, n_served = 0, n_drop = 0;
  task automatic model_act(int r);
    int hi, mi;
    hi = -1; mi = 0;
    for (int e = 0; e < E; e++) if (hi < 0 && m_row[e] == r) hi = e;
    for (int e = E - 1; e >= 0; e--) if (m_cnt[e] <= m_cnt[mi]) mi = e;
    if (hi >= 0) begin
      m_cnt[hi]++;
      if (m_cnt[hi] % AM == 0) exp_trig.push_back(r);
    end else if (m_sp == m_cnt[mi]) begin
      m_row[mi] = r; m_cnt[mi]++;
      if (m_cnt[mi] % AM == 0) exp_trig.push_back(r);
    end else m_sp++;
  endtask
  task automatic model_reset();
    for (int e = 0; e < E; e++) m_cnt[e] = 0;
    m_sp = 0;
    acts_in_win.delete(); trig_in_win.delete();
  endtask

  // sampled at the clock edge, where the DUT samples act_i
  always @(posedge clk) if (rst_n) begin
    if (act) begin
      if (drop) n_drop++;
      else begin
        model_act(int'(arow));
        if (acts_in_win.exists(int'(arow))) acts_in_win[int'(arow)]++; else acts_in_win[int'(arow)] = 1;
      end
    end
    if (trig) begin
      int r;
      r = int'(dut.key_q);
      n_trig++;
      if (exp_trig.size() == 0) chk(0, $sformatf("unexpected trigger of row %0d", r));
      else begin
        int e;
        e = exp_trig.pop_front();
        chk(r == e, $sformatf("trigger row %0d, model %0d", r, e));
      end
      if (trig_in_win.exists(r)) trig_in_win[r]++; else trig_in_win[r] = 1;
    end
  end

  // victim refresh checker
  int got [$]; int aggr [$]; int prev = -1;
  always @(negedge clk) if (rst_n) begin
    if (trig) aggr.push_back(int'(dut.key_q));
    if (mop.active) begin
      chk(locked && lreg == region_of(mop.row), "victim refresh outside the locked region");
      if (int'(mop.row) != prev) got.push_back(int'(mop.row));
      prev = int'(mop.row);
    end else prev = -1;
    if (served) begin
      int a;
      a = aggr.pop_front();
      chk(got.size() == 2 && (a - 1) inside {got} && (a + 1) inside {got},
          $sformatf("aggressor %0d: refreshed %p", a, got));
      got.delete();
      n_served++;
    end
  end

  task automatic issue(int r);
    act = 1; arow = row_t'(r);
    @(negedge clk);
    act = 0;
    repeat ($urandom_range(8, 14)) @(negedge clk);
  endtask

  initial begin
    int hot [4];
    act = 0; arow = '0; lrsp = '0;
    for (int e = 0; e < E; e++) begin m_row[e] = 0; m_cnt[e] = 0; end
    m_sp = 0;
    hot = '{1000, 1002, 77777, 40000};
    repeat (2) @(negedge clk);
    rst_n = 1;
    // phase 1: hot rows mixed with random rows, inside the first window
    while ($time < 40000 * 10) begin
      if ($urandom_range(0, 1)) issue(hot[$urandom_range(0, 3)]);
      else issue(600 + $urandom_range(0, 63) * 3);
    end
    repeat (200) @(negedge clk);
    chk(exp_trig.size() == 0, $sformatf("%0d model triggers not seen", exp_trig.size()));
    chk(int'(sp) == m_sp, $sformatf("SP %0d, model %0d", sp, m_sp));
    // Graphene guarantee: fewer than (triggers+1)*ACT_MAX + SP activations
    foreach (acts_in_win[r]) begin
      int t;
      t = trig_in_win.exists(r) ? trig_in_win[r] : 0;
      chk(acts_in_win[r] < (t + 1) * AM + m_sp, $sformatf("row %0d: %0d ACTs, %0d triggers", r, acts_in_win[r], t));
    end
    // phase 2: ACT_MAX-1 activations of a fresh row just before the window
    // reset and ACT_MAX-1 after it: no trigger
    wait ($time > (WIN - 1000) * 10);
    begin
      int ntrig0;
      for (int i = 0; i < AM - 1; i++) begin act = 1; arow = row_t'(5555); @(negedge clk); act = 0; repeat (10) @(negedge clk); end
      wait ($time > (WIN + 200) * 10);
      model_reset();
      ntrig0 = n_trig;
      chk(sp == 0, "SP not cleared by the window reset");
      for (int i = 0; i < AM - 1; i++) begin act = 1; arow = row_t'(5555); @(negedge clk); act = 0; repeat (10) @(negedge clk); end
      repeat (50) @(negedge clk);
      chk(n_trig == ntrig0, "trigger across the window reset");
    end
    repeat (200) @(negedge clk);
    chk(n_served == n_trig, $sformatf("triggers %0d, served %0d", n_trig, n_served));
    chk(n_trig > 15, "too few triggers");
    $display("triggers=%0d served=%0d drops=%0d sp=%0d", n_trig, n_served, n_drop, sp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
