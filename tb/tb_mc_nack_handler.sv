`timescale 1ns/1ps
// tb_mc_nack_handler: self-checking test of the memory controller's ACT_NACK
// handling, for all three divergence policies at once (instances with
// POLICY = 0 Precharge, 1 Wait, 2 Hybrid) fed by the same command stream.
// A random stream of ACT/PRE/NOP commands to 2 ranks x 16 banks is applied;
// ACT_NACK is raised T_NACK = 5 cycles after a random 30% of the ACTs. For
// each instance a reference model of the per-bank state (tracked region, ARI
// timer, need-precharge, waiting row) is kept and the outputs are compared
// every cycle, including act_ok_o for a random query. Directed part: after a
// NACK the same region is refused for exactly ARI = 100 cycles, other regions
// of the bank stay allowed (Wait) and Precharge forces a PRE first.
module tb_mc_nack_handler;
  import smd_pkg::*;
  localparam int RB = 32, ARI = 100;
  logic clk = 0, rst_n = 0;
  cmd_t cmd; logic rank; logic nack;
  logic [6:0] other [RB];
  logic q_rank; bank_t q_bank; row_t q_row;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s (t=%0t)", msg, $time); end
  endtask
  initial begin
    #10000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int nevt [3], nwait [3];
  bit run_random = 1;

  for (genvar p = 0; p < 3; p++) begin : g_p
    logic ok, tv [RB], np [RB], wv [RB], evt, evw; region_t tr [RB]; row_t wr [RB];
    mc_nack_handler #(.POLICY(p)) u (
      .clk, .rst_n, .cmd_i(cmd), .rank_i(rank), .nack_i(nack), .other_reqs_i(other),
      .q_rank_i(q_rank), .q_bank_i(q_bank), .q_row_i(q_row), .act_ok_o(ok),
      .trk_valid_o(tv), .trk_region_o(tr), .need_pre_o(np), .wait_valid_o(wv), .wait_row_o(wr),
      .nack_evt_o(evt), .nack_wait_o(evw));

    // reference model
    bit m_tv [RB]; int m_tr [RB]; int m_ari [RB]; bit m_np [RB]; bit m_wv [RB]; int m_wr [RB];
    always @(negedge clk) if (rst_n && run_random) begin
      // compare first (state after the last edge)
      for (int i = 0; i < RB; i++) begin
        chk(tv[i] == m_tv[i] && (!m_tv[i] || int'(tr[i]) == m_tr[i]), $sformatf("P%0d bank %0d tracking", p, i));
        chk(np[i] == m_np[i], $sformatf("P%0d bank %0d need_pre", p, i));
        chk(wv[i] == m_wv[i] && (!m_wv[i] || int'(wr[i]) == m_wr[i]), $sformatf("P%0d bank %0d wait", p, i));
      end
    end
    // model update at the edge, from the inputs of the ending cycle
    always @(posedge clk) if (rst_n) begin
      int qb; bit mok;
      qb = int'(q_rank) * 16 + int'(q_bank);
      mok = !(m_tv[qb] && m_tr[qb] == int'(region_of(q_row)) && m_ari[qb] != 0) && !m_np[qb] &&
            !(m_wv[qb] && (m_wr[qb] != int'(q_row) || m_ari[qb] != 0));
      if (run_random) chk(ok == mok, $sformatf("P%0d act_ok %0b expected %0b", p, ok, mok));
      if (evt) nevt[p]++;
      if (evw) nwait[p]++;
      for (int i = 0; i < RB; i++) if (m_ari[i] != 0) m_ari[i]--;
      if (h_valid) begin
        int b;
        b = h_rb;
        if (nack) begin
          bit w;
          w = (p == 1) || (p == 2 && int'(other[b]) < 2);
          m_tv[b] = 1; m_tr[b] = int'(region_of(h_row)); m_ari[b] = ARI;
          if (w) begin m_wv[b] = 1; m_wr[b] = int'(h_row); end else m_np[b] = 1;
          chk(evt && evw == w, $sformatf("P%0d NACK event flags", p));
        end else begin
          if (m_tv[b] && m_tr[b] == int'(region_of(h_row))) m_tv[b] = 0;
          if (m_wv[b] && m_wr[b] == int'(h_row)) m_wv[b] = 0;
        end
      end
      if (cmd.cmd == CMD_PRE) begin
        m_np[int'(rank) * 16 + int'(cmd.bank)] = 0;
        m_wv[int'(rank) * 16 + int'(cmd.bank)] = 0;
      end
    end
  end

  // ACTs in flight (testbench side), head = ACT of T_NACK cycles ago
  bit   fl_v [T_NACK]; int fl_rb [T_NACK]; row_t fl_row [T_NACK];
  bit   h_valid; int h_rb; row_t h_row;
  assign h_valid = fl_v[T_NACK-1];
  assign h_rb    = fl_rb[T_NACK-1];
  assign h_row   = fl_row[T_NACK-1];
  always @(posedge clk) begin
    for (int i = T_NACK - 1; i > 0; i--) begin fl_v[i] <= fl_v[i-1]; fl_rb[i] <= fl_rb[i-1]; fl_row[i] <= fl_row[i-1]; end
    fl_v[0] <= rst_n && cmd.cmd == CMD_ACT; fl_rb[0] <= int'(rank) * 16 + int'(cmd.bank); fl_row[0] <= cmd.row;
  end

  task automatic send(cmd_e c, int rk, int bk, row_t r);
    cmd = '{cmd: c, bank: bank_t'(bk), row: r, col: '0}; rank = rk[0];
  endtask

  initial begin
    cmd = '0; rank = 0; nack = 0; q_rank = 0; q_bank = '0; q_row = '0;
    foreach (other[i]) other[i] = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 30000; i++) begin
      @(negedge clk);
      nack = h_valid && ($urandom_range(0, 9) < 3);   // NACK while that ACT is at the head
      case ($urandom_range(0, 3))
        0, 1: send(CMD_ACT, $urandom_range(0, 1), $urandom_range(0, 3), {region_t'($urandom_range(0, 3)), lrow_t'($urandom_range(0, 2))});
        2: send(CMD_PRE, $urandom_range(0, 1), $urandom_range(0, 3), '0);
        default: cmd = '0;
      endcase
      foreach (other[k]) other[k] = 7'($urandom_range(0, 3));
      q_rank = $urandom_range(0, 1); q_bank = bank_t'($urandom_range(0, 3));
      q_row = {region_t'($urandom_range(0, 3)), lrow_t'($urandom_range(0, 2))};
    end
    // directed: ARI to the cycle, on rank 1 bank 9 (untouched so far)
    @(negedge clk); cmd = '0; nack = 0;
    repeat (10) @(negedge clk);
    run_random = 0;
    send(CMD_ACT, 1, 9, {region_t'(5), lrow_t'(7)});
    @(negedge clk); cmd = '0;
    repeat (T_NACK - 1) @(negedge clk);
    nack = 1;                       // T_NACK cycles after the ACT
    @(negedge clk); nack = 0;
    q_rank = 1; q_bank = 9;
    // Wait instance: same row refused for ARI cycles, then allowed
    for (int t = 1; t <= ARI + 2; t++) begin
      q_row = {region_t'(5), lrow_t'(7)}; #1;
      chk(g_p[1].ok == (t > ARI), $sformatf("Wait: same row at +%0d ok=%0b", t, g_p[1].ok));
      chk(g_p[0].ok == 0, "Precharge: ACT allowed before PRE");
      q_row = {region_t'(6), lrow_t'(7)}; #1;
      chk(g_p[1].ok == 0, "Wait: other row of the waiting bank allowed");
      @(negedge clk);
    end
    send(CMD_PRE, 1, 9, '0);
    @(negedge clk); cmd = '0;
    q_row = {region_t'(6), lrow_t'(1)}; #1;
    chk(g_p[0].ok, "Precharge: other region refused after PRE");
    for (int p = 0; p < 3; p++) chk(nevt[p] > 100, $sformatf("policy %0d: %0d NACKs handled", p, nevt[p]));
    chk(nwait[0] == 0 && nwait[1] == nevt[1] && nwait[2] > 0 && nwait[2] < nevt[2], "policy use counts");
    $display("NACKs: %0d/%0d/%0d, handled with Wait: %0d/%0d/%0d", nevt[0], nevt[1], nevt[2], nwait[0], nwait[1], nwait[2]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
