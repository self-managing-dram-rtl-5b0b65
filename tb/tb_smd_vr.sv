`timescale 1ns/1ps
// tb_smd_vr: self-checking test of SMD-VR (variable refresh) over five full
// sweeps of a bank (RCC = 0,1,2,3,0).
// 200 random rows are inserted into the Bloom filter as retention-weak rows.
// A reference model of the filter (same hashes) gives, for every row, whether
// the filter reports it. The monitor records each refreshed row and checks at
// every sweep boundary:
//   - in a sweep with RCC = 0 every one of the 128K rows is refreshed exactly
//     once;
//   - in the other sweeps exactly the rows the filter reports are refreshed,
//     so every weak row is refreshed every sweep and no other row is;
//   - operations with no marked row take no lock (skipped_o) and operations
//     with a marked row lock only the region being refreshed.
// T_ROW_REF is shortened to 2 cycles and T_REF_INC to 32 so that a sweep of
// 16384 operations simulates quickly; RG, VR_FACTOR and the filter size keep
// the paper's values.
module tb_smd_vr;
  import smd_pkg::*;
  localparam int unsigned NROWS = 1 << ROW_BITS;
  localparam int unsigned NWEAK = 200;
  logic clk = 0, rst_n = 0;
  lock_req_t lreq; lock_rsp_t lrsp; mop_t mop;
  logic bf_ins; row_t bf_row;
  logic [3:0] prc; logic [1:0] rcc; logic done, skipped;
  int checks = 0, failures = 0;

  smd_vr #(.T_ROW_REF(2), .T_REF_INC(32)) dut (
    .clk, .rst_n, .lreq_o(lreq), .lrsp_i(lrsp), .mop_o(mop), .bf_ins_i(bf_ins), .bf_row_i(bf_row),
    .prc_o(prc), .rcc_o(rcc), .op_done_o(done), .skipped_o(skipped));
  always #5 clk = ~clk;

  bit bfm [8192];
  bit hitm [NROWS];
  bit isweak [NROWS];
  byte cnt [NROWS];

  function automatic int h(int k, row_t r);
    int v = 0;
    for (int j = 0; j < 13; j++) v |= int'(^(r & bf_mask(k, j))) << j;
    return v;
  endfunction
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s (t=%0t)", msg, $time); end
  endtask

  initial begin
    #60000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // lock model: grant one cycle after the request
  logic locked = 0; region_t lreg;
  always @(posedge clk) begin
    lrsp <= '0;
    if (lreq.req && !locked && !lrsp.granted) begin lrsp.granted <= 1; locked <= 1; lreg <= lreq.region; end
    if (lreq.rel || !rst_n) locked <= 0;
  end

  // monitor
  int  prev_row = -1;
  int  sweeps = 0, skips = 0, locked_ops = 0;
  logic [1:0] sweep_rcc = 0;
  logic [1:0] rcc_d = 0;
  always @(negedge clk) if (rst_n && sweeps < 5) begin
    if (mop.active) begin
      chk(locked && lreg == region_of(mop.row), "refresh outside the locked region");
      if (int'(mop.row) != prev_row) cnt[mop.row]++;
      prev_row = int'(mop.row);
    end else prev_row = -1;
    if (done) begin
      if (skipped) skips++; else locked_ops++;
    end
    if (rcc != rcc_d) begin
      int n, bad, miss;
      n = 0; bad = 0; miss = 0;
      for (int r = 0; r < NROWS; r++) begin
        n += cnt[r];
        if (sweep_rcc == 0) begin if (cnt[r] != 1) bad++; end
        else begin
          if (cnt[r] != byte'(hitm[r])) bad++;
          if (isweak[r] && cnt[r] != 1) miss++;
        end
        cnt[r] = 0;
      end
      chk(bad == 0, $sformatf("sweep %0d (rcc %0d): %0d rows refreshed wrongly", sweeps, sweep_rcc, bad));
      chk(miss == 0, $sformatf("sweep %0d: %0d weak rows not refreshed", sweeps, miss));
      if (sweep_rcc == 0) chk(n == NROWS, $sformatf("full sweep refreshed %0d rows", n));
      $display("sweep %0d rcc=%0d refreshed_rows=%0d", sweeps, sweep_rcc, n);
      sweeps++; sweep_rcc = rcc; rcc_d = rcc;
    end
  end

  initial begin
    bf_ins = 0; bf_row = '0; lrsp = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // manufacturing-time insertion of the weak rows (PRC is still 0 here)
    for (int i = 0; i < NWEAK; i++) begin
      row_t r;
      r = row_t'($urandom);
      isweak[r] = 1;
      for (int k = 0; k < 6; k++) bfm[h(k, r)] = 1;
      bf_ins = 1; bf_row = r;
      @(negedge clk);
    end
    bf_ins = 0;
    for (int r = 0; r < NROWS; r++) begin
      bit m;
      m = 1;
      for (int k = 0; k < 6; k++) m &= bfm[h(k, row_t'(r))];
      hitm[r] = m;
    end
    wait (sweeps == 5);
    chk(skips > 0 && locked_ops > 0, $sformatf("skipped ops %0d, locking ops %0d", skips, locked_ops));
    $display("skipped ops %0d, locking ops %0d", skips, locked_ops);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
