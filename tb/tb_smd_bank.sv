`timescale 1ns/1ps
// tb_smd_bank: self-checking test of a whole SMD bank in its two
// configurations, side by side:
//   u0: SMD-Combined (SMD-FR + SMD-DRP + SMD-MS), the default;
//   u1: SMD-VR + SMD-PRP, no scrubbing.
// Time constants are shortened (refresh op every 400 cycles, scrub op every
// 5000, DRP window 200000 cycles with 256 entries / ACT_MAX 64, sized by
// Graphene's rule for the ~7000 ACTs per window issued here; ARI 20 cycles)
// so that every mechanism runs many times. Each bank has its own memory
// controller model: it opens random rows (a few hot rows often, to trigger
// RowHammer protection; 16 hot rows at subarray edges of regions 3 and 12), keeps them open 4-30 cycles, closes them with PRE
// and, after a NACK, waits ARI cycles before retrying. Checks, every cycle:
//   - nack_o equals the testbench's prediction from lrb_o and the locks
//     granted in the same cycle: the ACT's region is locked, or its subarray
//     borders a locked region (open bitline);
//   - a maintenance row is driven only in a locked region and never in the
//     region of the MC's open row;
//   - the MC's open row is the one its latch drives (wl_o), and no other
//     region holds an MC row (PRE closes it);
// and at the end that every DRP trigger was served (up to the 4 queued), and
// that refresh, scrub (u0), RowHammer triggers and neighbour
// refreshes, NACKs and lock refusals (cannot_lock) all happened.
module tb_smd_bank;
  import smd_pkg::*;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s (t=%0t)", msg, $time); end
  endtask
  initial begin
    #20000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  int ev_cnt [2][5];
  int nacks [2];
  int accepted [2];
  bit stop = 0;

  for (genvar k = 0; k < 2; k++) begin : g_b
    cmd_t cmd; logic nack, act_ok; ra_latch_t wl [REGIONS]; logic [REGIONS-1:0] lrb;
    logic rd, wr, err; row_t crow; logic [6:0] ccol; row_t mrow; logic [7:0] mcnt; logic [4:0] ev;
    logic bf_ins = 0; row_t bf_row = '0;
    smd_bank #(.REF_MECH(k), .RH_MECH(k), .SCRUB_EN(k == 0), .T_REF_INC(400), .T_SCRUB_INC(5000),
               .TREFW_CYC(200000), .CT_ENTRIES(256), .ACT_MAX(64), .ARI_CYC(20)) u (
      .clk, .rst_n, .seed_i(16'h1234), .cmd_i(cmd), .nack_o(nack), .act_ok_o(act_ok), .wl_o(wl),
      .lrb_o(lrb), .cw_rd_o(rd), .cw_wr_o(wr), .cw_row_o(crow), .cw_col_o(ccol), .ecc_err_i(err),
      .msr_row_o(mrow), .msr_cnt_o(mcnt), .bf_ins_i(bf_ins), .bf_row_i(bf_row), .ev_o(ev));
    assign err = rd && ($urandom_range(0, 199) == 0);

    function automatic bit blocked(row_t r, logic [REGIONS-1:0] b);
      int g, sa;
      g = region_of(r); sa = int'(r[LROW_BITS-1:SA_BITS]);
      if (b[g]) return 1;
      if (sa == 0 && g > 0 && b[g-1]) return 1;
      if (sa == 15 && g < REGIONS - 1 && b[g+1]) return 1;
      return 0;
    endfunction

    // MC model
    logic open = 0; row_t orow; logic was_nacked;
    initial begin
      cmd = '0;
      wait (rst_n);
      while (!stop) begin
        row_t r;
        @(negedge clk);
        if ($urandom_range(0, 1)) r = {region_t'($urandom_range(0, 1) * 9 + 3), 4'($urandom_range(0, 1) * 15), 9'($urandom_range(0, 3))};
        else r = row_t'($urandom);
        cmd = '{cmd: CMD_ACT, bank: '0, row: r, col: '0};
        #1;
        // a lock granted in this very cycle also blocks (maintenance wins)
        begin
          logic [REGIONS-1:0] b;
          b = lrb;
          for (int i = 0; i < 3; i++)
            if (u.lrsp[i].granted) b |= u.lreq[i].all ? '1 : (REGIONS'(1) << u.lreq[i].region);
          chk(nack == blocked(r, b), $sformatf("bank %0d: nack=%0b for row %0d, lrb=%h", k, nack, r, lrb));
        end
        was_nacked = nack;
        @(negedge clk);
        cmd = '0;
        if (was_nacked) begin
          nacks[k]++;
          repeat (20) @(negedge clk);
        end else begin
          accepted[k]++;
          open = 1; orow = r;
          repeat ($urandom_range(4, 30)) @(negedge clk);
          cmd = '{cmd: CMD_PRE, bank: '0, row: r, col: '0};
          @(negedge clk);
          cmd = '0; open = 0;
          repeat ($urandom_range(0, 6)) @(negedge clk);
        end
      end
    end

    always @(negedge clk) if (rst_n) begin
      #2;
      for (int g = 0; g < REGIONS; g++) begin
        if (wl[g].valid && wl[g].maint) begin
          chk(lrb[g], $sformatf("bank %0d: maintenance row in unlocked region %0d", k, g));
          chk(!(open && region_of(orow) == region_t'(g)), $sformatf("bank %0d: maintenance in the MC's open region", k));
        end
        if (wl[g].valid && !wl[g].maint)
          chk(open && region_of(orow) == region_t'(g), $sformatf("bank %0d: MC row latched in region %0d with no open row", k, g));
      end
      if (open) chk(wl[region_of(orow)].valid && !wl[region_of(orow)].maint && wl[region_of(orow)].lrow == lrow_t'(orow),
                    $sformatf("bank %0d: open row not latched", k));
      for (int i = 0; i < 5; i++) if (ev[i]) ev_cnt[k][i]++;
    end
  end

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1;
    repeat (300000) @(negedge clk);
    stop = 1;
    repeat (100) @(negedge clk);
    for (int k = 0; k < 2; k++) begin
      $display("bank %0d: accepted=%0d nacks=%0d refresh_ops=%0d rh_triggers=%0d rh_served=%0d scrubs=%0d cannot_lock=%0d",
               k, accepted[k], nacks[k], ev_cnt[k][4], ev_cnt[k][3], ev_cnt[k][2], ev_cnt[k][1], ev_cnt[k][0]);
      chk(nacks[k] > 0, "no NACK");
      chk(ev_cnt[k][4] > 0, "no refresh operation");
      chk(ev_cnt[k][3] > 0, "no RowHammer trigger/mark");
      chk(ev_cnt[k][2] > 0, "no neighbour refresh");
      if (k == 0) chk(ev_cnt[k][2] >= ev_cnt[k][3] - 4, "RowHammer triggers not served");
      chk(ev_cnt[k][0] > 0, "no cannot_lock");
    end
    chk(ev_cnt[0][1] > 0, "no scrub operation");
    chk(ev_cnt[1][1] == 0, "scrub in a bank without SMD-MS");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
