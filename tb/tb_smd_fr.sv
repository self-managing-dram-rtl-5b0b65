`timescale 1ns/1ps
// tb_smd_fr: self-checking test of SMD-FR (fixed-rate refresh) for one bank.
// The lock controller is modelled by the testbench: a lock request is granted
// after a random delay, or withheld for a long stretch to let the pending
// refresh counter (PRC) saturate. The monitor checks, for every operation:
//   - it locks region LRC and the regions are visited 0,1,..,15,0,...;
//   - it refreshes exactly RG consecutive rows RAC..RAC+RG-1 of that region,
//     each for exactly T_ROW_REF cycles, with RAC advancing by RG per sweep;
//   - the lock is released once, right after the last row;
//   - PRC never exceeds PRC_MAX and the number of operations matches the
//     number of PRC increments (after saturation the surplus is dropped).
// T_REF_INC is shortened to 1000 cycles so the test finishes quickly; RG,
// PRC_MAX and T_ROW_REF keep their paper values.
module tb_smd_fr;
  import smd_pkg::*;
  localparam int unsigned T_INC = 1000;
  localparam int unsigned RG = 8, TRR = 80, PMAX = 8;
  logic clk = 0, rst_n = 0;
  lock_req_t lreq;
  lock_rsp_t lrsp;
  mop_t mop;
  logic [3:0] prc;
  region_t lrc;
  lrow_t rac;
  logic done;
  int checks = 0, failures = 0;

  smd_fr #(.T_REF_INC(T_INC)) dut (.clk, .rst_n, .lreq_o(lreq), .lrsp_i(lrsp), .mop_o(mop),
                                   .prc_o(prc), .lrc_o(lrc), .rac_o(rac), .op_done_o(done));
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s (t=%0t)", msg, $time); end
  endtask

  initial begin
    #100000000;
    failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // lock controller model
  logic hold_grant = 0;
  int   wait_n = 0;
  logic locked = 0;
  always @(posedge clk) begin
    lrsp.granted <= 0; lrsp.cannot_lock <= 0;
    if (lreq.req && !locked && !hold_grant) begin
      if (wait_n == 0) begin lrsp.granted <= 1; locked <= 1; wait_n <= $urandom_range(0, 6); end
      else wait_n <= wait_n - 1;
    end
    if (lreq.rel || !rst_n) locked <= 0;
  end

  // monitor
  int ops = 0, incs = 0, sat_drops = 0;
  int cur_row = -1, run = 0, rows_in_op = 0;
  int op_region;
  always @(posedge clk) if (rst_n) begin
    #1;
    if (dut.tick) begin
      if (prc == 4'(PMAX) && !done) sat_drops++;
    end
  end

  always @(negedge clk) if (rst_n) begin
    chk(prc <= PMAX, "PRC above PRC_MAX");
    if (mop.active) begin
      int r;
      r = int'(mop.row);
      if (r != cur_row) begin
        if (cur_row >= 0) chk(run == TRR, $sformatf("row %0d held %0d cycles", cur_row, run));
        if (rows_in_op == 0) begin
          op_region = ops % REGIONS;
          chk(int'(region_of(mop.row)) == op_region, $sformatf("op %0d locks region %0d", ops, region_of(mop.row)));
          chk(locked, "refresh without lock");
        end
        chk(int'(region_of(mop.row)) == op_region, "row outside locked region");
        chk(int'(lrow_t'(mop.row)) == (ops / REGIONS) * RG + rows_in_op,
            $sformatf("op %0d row %0d local %0d", ops, rows_in_op, lrow_t'(mop.row)));
        cur_row = r; run = 1; rows_in_op++;
      end else run++;
    end else if (cur_row >= 0) begin
      chk(run == TRR, $sformatf("last row held %0d cycles", run));
      chk(rows_in_op == RG, $sformatf("op refreshed %0d rows", rows_in_op));
      chk(lreq.rel, "lock not released right after last row");
      cur_row = -1; run = 0; rows_in_op = 0; ops++;
    end
    if (lreq.rel) chk(!mop.active, "release while refreshing");
  end

  initial begin
    lrsp = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    // phase 1: normal operation for 40 increments
    repeat (40 * T_INC) @(negedge clk);
    chk(ops >= 38 && ops <= 40, $sformatf("phase 1: %0d ops after 40 increments", ops));
    // phase 2: withhold grants for 12 increments: PRC must saturate at 8
    hold_grant = 1;
    repeat (12 * T_INC) @(negedge clk);
    chk(prc == 4'(PMAX), $sformatf("PRC=%0d after withholding grants", prc));
    chk(sat_drops >= 3, $sformatf("saturation drops %0d", sat_drops));
    hold_grant = 0;
    // phase 3: the backlog drains (one op takes ~645 cycles, one increment 1000)
    repeat (20 * T_INC) @(negedge clk);
    chk(prc <= 1, $sformatf("PRC=%0d after draining", prc));
    // total: 72 increments minus those dropped while saturated
    chk(ops + int'(prc) + (mop.active ? 1 : 0) >= 72 - sat_drops - 1 && ops + int'(prc) <= 72 - sat_drops + 1,
        $sformatf("ops=%0d prc=%0d drops=%0d", ops, prc, sat_drops));
    chk(ops >= REGIONS + 1, "regions wrapped and RAC advanced");
    $display("ops=%0d saturation_drops=%0d rac=%0d", ops, sat_drops, rac);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
