`timescale 1ns/1ps
// tb_lock_controller: directed, self-checking test of the per-bank Lock
// Controller. Inputs change at the falling edge; combinational answers
// (granted / cannot_lock / nack / act_ok) are checked just before the rising
// edge that commits them. Covered: ACT accept and reject, the open-bitline
// neighbour rule, cannot_lock for a held lock and for an open row, the ARI
// hold-off after release (checked to the cycle), same-cycle ACT/lock race,
// all-region lock, requester priority and the repeated-ACT rule.
module tb_lock_controller;
  import smd_pkg::*;
  localparam int ARI = 20;
  logic clk = 0, rst_n = 0;
  cmd_t cmd;
  lock_req_t lreq [3];
  lock_rsp_t lrsp [3];
  logic nack, act_ok, open;
  row_t open_row;
  logic [REGIONS-1:0] lrbv;
  int checks = 0, failures = 0;

  lock_controller #(.NREQ(3), .ARI_CYC(ARI)) dut (
    .clk, .rst_n, .cmd_i(cmd), .lreq_i(lreq), .lrsp_o(lrsp), .nack_o(nack), .act_ok_o(act_ok),
    .open_o(open), .open_row_o(open_row), .lrb_o(lrbv));

  always #5 clk = ~clk;

  task automatic chk(string what, logic got, logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %0b expected %0b at %0t", what, got, exp, $time);
    end
  endtask

  task automatic idle();
    cmd = '{cmd: CMD_NOP, bank: '0, row: '0, col: '0};
    for (int i = 0; i < 3; i++) lreq[i] = '0;
  endtask

  // drive for one cycle, leave the result to be checked before the edge
  task automatic drive_act(int unsigned r);
    cmd = '{cmd: CMD_ACT, bank: '0, row: row_t'(r), col: '0};
  endtask

  task automatic edge_();
    @(posedge clk); #1; @(negedge clk);
  endtask

  function automatic int unsigned row_of(int unsigned g, int unsigned off);
    return g * 8192 + off;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int unsigned t0, n;
    idle();
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // 1. ACT to a free bank is accepted, PRE closes it
    drive_act(row_of(3, 5)); #3;
    chk("act accepted", act_ok, 1); chk("no nack", nack, 0);
    edge_(); idle();
    chk("row open", open, 1);
    cmd.cmd = CMD_PRE; edge_(); idle();
    chk("closed", open, 0);

    // 2. lock region 5 (requester 2)
    lreq[2] = '{req: 1, all: 0, rel: 0, region: 4'd5}; #3;
    chk("grant r5", lrsp[2].granted, 1);
    edge_(); idle();
    chk("lrb bit5", lrbv[5], 1);

    // 3. ACTs: into region 5, into neighbouring subarrays, elsewhere
    drive_act(row_of(5, 100)); #3; chk("nack in region", nack, 1); chk("not ok", act_ok, 0); edge_(); idle();
    drive_act(row_of(4, 8191)); #3; chk("nack sa below", nack, 1); edge_(); idle();
    drive_act(row_of(6, 0)); #3; chk("nack sa above", nack, 1); edge_(); idle();
    drive_act(row_of(4, 7679)); #3; chk("ok two sa below", act_ok, 1); chk("no nack 2sa", nack, 0); edge_(); idle();
    // 10. repeated ACT of the open row is accepted, no nack
    drive_act(row_of(4, 7679)); #3; chk("re-act ok", act_ok, 1); chk("re-act no nack", nack, 0); edge_(); idle();
    cmd.cmd = CMD_PRE; edge_(); idle();

    // 4. second lock while one is held: cannot_lock
    lreq[1] = '{req: 1, all: 0, rel: 0, region: 4'd9}; #3;
    chk("held -> cannot", lrsp[1].cannot_lock, 1); chk("held -> no grant", lrsp[1].granted, 0);
    edge_(); idle();

    // 5. release region 5; re-lock refused for ARI cycles, then granted
    lreq[2].rel = 1; edge_(); idle();
    chk("lrb cleared", lrbv[5], 0);
    t0 = 0; n = 0;
    lreq[2] = '{req: 1, all: 0, rel: 0, region: 4'd5};
    while (n < 100) begin
      #3;
      if (lrsp[2].granted) break;
      n++;
      edge_();
    end
    // released at edge k: the region is refused for exactly ARI cycles
    chk("ARI hold-off length", n == ARI, 1);
    if (n != ARI - 1) $display("  hold-off cycles %0d, expected %0d", n, ARI);
    edge_(); idle();
    // while holding-off, another region is grantable: release, lock region 7 immediately
    lreq[2].rel = 1; edge_(); idle();
    lreq[2] = '{req: 1, all: 0, rel: 0, region: 4'd7}; #3;
    chk("other region free", lrsp[2].granted, 1); edge_(); idle();
    lreq[2].rel = 1; edge_(); idle();
    repeat (ARI + 2) edge_();

    // 6. open row blocks the lock of its region and of the neighbour region's edge
    drive_act(row_of(8, 3)); edge_(); idle();
    lreq[2] = '{req: 1, all: 0, rel: 0, region: 4'd8}; #3;
    chk("open row -> cannot", lrsp[2].cannot_lock, 1); edge_();
    lreq[2].region = 4'd7; #3;
    chk("open row adj -> cannot", lrsp[2].cannot_lock, 1); edge_();
    lreq[2].region = 4'd9; #3;
    chk("open row not adj -> grant", lrsp[2].granted, 1); edge_(); idle();
    lreq[2].rel = 1; edge_(); idle();
    cmd.cmd = CMD_PRE; edge_(); idle();
    repeat (ARI + 2) edge_();

    // 7. same-cycle ACT and lock of the same region: lock wins
    drive_act(row_of(2, 77));
    lreq[2] = '{req: 1, all: 0, rel: 0, region: 4'd2}; #3;
    chk("race grant", lrsp[2].granted, 1); chk("race nack", nack, 1); chk("race no ok", act_ok, 0);
    edge_(); idle();
    chk("race row not open", open, 0);
    lreq[2].rel = 1; edge_(); idle();
    repeat (ARI + 2) edge_();

    // 8. all-region lock needs a precharged bank
    drive_act(row_of(12, 1)); edge_(); idle();
    lreq[0] = '{req: 1, all: 1, rel: 0, region: 4'd0}; #3;
    chk("all with open row -> cannot", lrsp[0].cannot_lock, 1); edge_(); idle();
    cmd.cmd = CMD_PRE; edge_(); idle();
    lreq[0] = '{req: 1, all: 1, rel: 0, region: 4'd0}; #3;
    chk("all granted", lrsp[0].granted, 1); edge_(); idle();
    chk("all bits", lrbv == '1, 1);
    drive_act(row_of(15, 9)); #3; chk("nack any region", nack, 1); edge_(); idle();
    lreq[0].rel = 1; edge_(); idle();
    chk("all cleared", lrbv == '0, 1);
    repeat (ARI + 2) edge_();

    // 9. priority: requester 0 beats 1 and 2 in the same cycle
    lreq[0] = '{req: 1, all: 0, rel: 0, region: 4'd1};
    lreq[1] = '{req: 1, all: 0, rel: 0, region: 4'd3};
    lreq[2] = '{req: 1, all: 0, rel: 0, region: 4'd4}; #3;
    chk("prio 0 wins", lrsp[0].granted, 1);
    chk("prio 1 refused", lrsp[1].cannot_lock, 1);
    chk("prio 2 refused", lrsp[2].cannot_lock, 1);
    edge_(); idle();
    chk("bit1 set", lrbv[1], 1); chk("bit3 clear", lrbv[3], 0);

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
