`timescale 1ns/1ps
// tb_smd_chip: self-checking test of one SMD chip (16 banks) at the ACT_NACK
// pin. Shortened time constants (refresh op every 300 cycles, scrub op every
// 4000) make the banks lock regions often. A memory controller model sends
// one command per cycle to a random bank: an ACT to a closed bank (often to a
// subarray at a region edge), or a PRE to an open one. An ACT's outcome is
// known only when the NACK window has passed. Checks:
//   - act_nack_o rises exactly T_NACK = 5 cycles after an ACT that a bank
//     rejected, and at no other time;
//   - an ACT whose region (or a neighbouring region across an edge subarray)
//     is locked in its bank's lrb_o is always NACKed;
//   - the MC row latches follow the commands per bank: an accepted ACT
//     latches the row in its bank only, a PRE clears it;
//   - every bank ran refresh and scrub operations, and NACKs happened.
module tb_smd_chip;
  import smd_pkg::*;
  logic clk = 0, rst_n = 0;
  cmd_t cmd; logic nack;
  ra_latch_t wl [BANKS][REGIONS]; logic [REGIONS-1:0] lrb [BANKS];
  logic rd [BANKS], wr [BANKS], err [BANKS]; row_t crow [BANKS]; logic [6:0] ccol [BANKS];
  row_t mrow [BANKS]; logic [7:0] mcnt [BANKS]; logic [4:0] ev [BANKS];
  int checks = 0, failures = 0;

  smd_chip #(.T_REF_INC(300), .T_SCRUB_INC(4000), .TREFW_CYC(100000), .CT_ENTRIES(64), .ACT_MAX(64)) dut (
    .clk, .rst_n, .seed_i(16'hACE1), .cmd_i(cmd), .act_nack_o(nack), .wl_o(wl), .lrb_o(lrb),
    .cw_rd_o(rd), .cw_wr_o(wr), .cw_row_o(crow), .cw_col_o(ccol), .ecc_err_i(err),
    .msr_row_o(mrow), .msr_cnt_o(mcnt), .bf_ins_i(1'b0), .bf_bank_i('0), .bf_row_i('0), .ev_o(ev));
  always #5 clk = ~clk;
  always_comb for (int b = 0; b < BANKS; b++) err[b] = 1'b0;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s (t=%0t)", msg, $time); end
  endtask
  initial begin
    #20000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic bit blocked(row_t r, logic [REGIONS-1:0] b);
    int g, sa;
    g = region_of(r); sa = int'(r[LROW_BITS-1:SA_BITS]);
    if (b[g]) return 1;
    if (sa == 0 && g > 0 && b[g-1]) return 1;
    if (sa == 15 && g < REGIONS - 1 && b[g+1]) return 1;
    return 0;
  endfunction

  // per-bank MC state: 0 closed, 1 ACT waiting for the NACK window, 2 open
  int st [BANKS]; row_t brow [BANKS]; int age [BANKS];
  int pend_bank [$]; int pend_t [$]; bit pend_nack [$]; bit pend_must [$];
  int cyc = 0, nacks = 0, accepted = 0;
  int ev_cnt [BANKS][5];

  initial begin
    cmd = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 150000; i++) begin
      int b;
      @(negedge clk);
      cyc++;
      cmd = '0;
      b = $urandom_range(0, BANKS - 1);
      if (st[b] == 0) begin
        row_t r;
        r = {region_t'($urandom_range(0, 15)), 4'($urandom_range(0, 1) * 15), 9'($urandom)};
        if ($urandom_range(0, 1)) r = row_t'($urandom);
        cmd = '{cmd: CMD_ACT, bank: bank_t'(b), row: r, col: '0};
        #1;
        pend_bank.push_back(b); pend_t.push_back(cyc);
        pend_nack.push_back(dut.nack_b[b]); pend_must.push_back(blocked(r, lrb[b]));
        chk(dut.nack_b == (BANKS'(dut.nack_b[b]) << b), "NACK from a bank that was not addressed");
        st[b] = 1; brow[b] = r;
      end else if (st[b] == 2 && age[b] > 10) begin
        cmd = '{cmd: CMD_PRE, bank: bank_t'(b), row: brow[b], col: '0};
        st[b] = 3;   // closes at this edge
      end
    end
    cmd = '0;
    repeat (20) @(negedge clk);
    for (int b = 0; b < BANKS; b++) begin
      chk(ev_cnt[b][4] > 0, $sformatf("bank %0d: no refresh", b));
      chk(ev_cnt[b][1] > 0, $sformatf("bank %0d: no scrub", b));
    end
    chk(nacks > 0 && accepted > 0, "no NACK or no accepted ACT");
    $display("accepted=%0d nacks=%0d", accepted, nacks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // pin check and MC state update, once per cycle just after the clock edge
  // (an ACT sent in cycle c is judged after the T_NACK-th edge, when the
  // stimulus counter still reads c + T_NACK - 1)
  always @(posedge clk) if (rst_n) begin
    bit exp_pin, must;
    #2;
    exp_pin = 0;
    if (pend_t.size() > 0 && cyc - pend_t[0] == T_NACK - 1) begin
      int b;
      b = pend_bank.pop_front(); void'(pend_t.pop_front());
      exp_pin = pend_nack.pop_front();
      must = pend_must.pop_front();
      chk(exp_pin || !must, $sformatf("bank %0d: ACT to a locked region accepted", b));
      if (exp_pin) begin st[b] = 0; nacks++; end
      else begin st[b] = 2; age[b] = 0; accepted++; end
    end
    chk(nack == exp_pin, $sformatf("pin %0b, expected %0b", nack, exp_pin));
    for (int b = 0; b < BANKS; b++) begin
      if (st[b] == 3) st[b] = 0;
      age[b]++;
      for (int i = 0; i < 5; i++) if (ev[b][i]) ev_cnt[b][i]++;
      for (int g = 0; g < REGIONS; g++)
        if (wl[b][g].valid && !wl[b][g].maint)
          chk(st[b] != 0 && region_of(brow[b]) == region_t'(g) && wl[b][g].lrow == lrow_t'(brow[b]),
              $sformatf("bank %0d region %0d: unexpected MC row latch", b, g));
    end
  end
endmodule
