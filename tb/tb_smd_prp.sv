`timescale 1ns/1ps
// tb_smd_prp: self-checking test of SMD-PRP (probabilistic RowHammer
// protection, PARA-style) for one bank.
// A random ACT stream (sparse, then one ACT per cycle) drives the mechanism.
// The testbench keeps its own copy of the 16-bit LFSR and of the Marked Rows
// Table and checks:
//   - mark_o equals the model: ACT && lfsr < P_MARK && region entry free;
//   - every service operation refreshes exactly the neighbours (row-1,
//     row+1, inside the subarray) of the row marked for that region, under
//     the lock of that region, and then frees the entry;
//   - the marking rate (lfsr < P_MARK per ACT) is near 1%;
//   - after the stream stops every marked row gets served.
module tb_smd_prp;
  import smd_pkg::*;
  localparam int unsigned PM = 655;
  logic clk = 0, rst_n = 0;
  logic act; row_t arow;
  lock_req_t lreq; lock_rsp_t lrsp; mop_t mop;
  logic mark, served;
  int checks = 0, failures = 0;

  smd_prp dut (.clk, .rst_n, .seed_i(16'h0), .act_i(act), .act_row_i(arow), .lreq_o(lreq), .lrsp_i(lrsp),
               .mop_o(mop), .mark_o(mark), .served_o(served));
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
    if (lreq.req && !locked && !lrsp.granted && $urandom_range(0, 2) == 0) begin
      lrsp.granted <= 1; locked <= 1; lreg <= lreq.region;
    end
    if (lreq.rel || !rst_n) locked <= 0;
  end

  // reference model
  logic [15:0] lfsr = 16'hACE1;
  bit   mv [REGIONS];
  int   mrow [REGIONS];
  int   acts = 0, lows = 0, marks = 0, serves = 0;
  int   got [$];
  int   prev = -1;
  always @(negedge clk) if (rst_n) begin
    bit em;
    em = act && (lfsr < PM) && !mv[region_of(arow)];
    chk(mark == em, $sformatf("mark=%0b expected %0b", mark, em));
    if (act) begin acts++; if (lfsr < PM) lows++; end
    if (mop.active) begin
      chk(locked && lreg == region_of(mop.row), "victim refresh outside the locked region");
      if (int'(mop.row) != prev) got.push_back(int'(mop.row));
      prev = int'(mop.row);
    end else prev = -1;
    if (served) begin
      int g, a; int exp [$];
      exp.delete();
      if (got.size() == 0) begin chk(0, "service without refresh"); end
      else begin
        g = got[0] >> LROW_BITS;
        chk(mv[g], $sformatf("service of region %0d with no marked row", g));
        a = (g << LROW_BITS) | mrow[g];
        if (subarray_of(row_t'(a - 1)) == subarray_of(row_t'(a)) && a > 0) exp.push_back(a - 1);
        if (subarray_of(row_t'(a + 1)) == subarray_of(row_t'(a)) && a < (1 << ROW_BITS) - 1) exp.push_back(a + 1);
        chk(got.size() == exp.size(), $sformatf("aggressor %0d: %0d victims refreshed", a, got.size()));
        foreach (exp[i]) chk(exp[i] inside {got}, $sformatf("victim %0d of %0d not refreshed", exp[i], a));
        mv[g] = 0;
      end
      got.delete();
      serves++;
    end
    if (mark) begin mv[region_of(arow)] = 1; mrow[region_of(arow)] = int'(lrow_t'(arow)); marks++; end
    lfsr = lfsr[0] ? ((lfsr >> 1) ^ 16'hB400) : (lfsr >> 1);
  end

  initial begin
    act = 0; arow = '0; lrsp = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // sparse stream
    for (int i = 0; i < 150000; i++) begin
      act = ($urandom_range(0, 7) == 0);
      arow = row_t'($urandom);
      if ($urandom_range(0, 9) == 0) arow = {region_t'(3), lrow_t'($urandom_range(0, 3) * 511)};
      @(negedge clk);
    end
    // dense stream: one ACT per cycle, MRT entries fill up
    for (int i = 0; i < 40000; i++) begin
      act = 1; arow = row_t'($urandom);
      @(negedge clk);
    end
    act = 0;
    repeat (20000) @(negedge clk);
    chk(serves == marks, $sformatf("marked %0d, served %0d", marks, serves));
    chk(lows * 1000 > acts * 7 && lows * 1000 < acts * 13, $sformatf("P_mark draws %0d of %0d ACTs", lows, acts));
    chk(marks > 100, "too few marks");
    $display("acts=%0d draws=%0d marks=%0d served=%0d", acts, lows, marks, serves);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
