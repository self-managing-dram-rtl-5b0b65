`timescale 1ns/1ps
// tb_bloom_filter: self-checking test of the weak-row Bloom filter at its
// paper size (8K cells, 6 hashes).
//   - an empty filter reports no hit;
//   - every inserted row hits afterwards (no false negatives);
//   - each query result equals a reference model that keeps its own 8K-bit
//     array and the same H3 hashes (smd_pkg::bf_mask);
//   - with 500 weak rows the false-positive rate on other rows stays below
//     1% (the analytic value is about 0.08%).
module tb_bloom_filter;
  import smd_pkg::*;
  localparam int unsigned M = 8192, K = 6, N = 500;
  logic clk = 0, rst_n = 0;
  logic ins; row_t ins_row, q_row; logic hit;
  int checks = 0, failures = 0;
  bit model [M];
  row_t wrow [N];

  bloom_filter dut (.clk, .rst_n, .ins_i(ins), .ins_row_i(ins_row), .q_row_i(q_row), .hit_o(hit));
  always #5 clk = ~clk;

  function automatic int h(int k, row_t r);
    int v = 0;
    for (int j = 0; j < $clog2(M); j++) v |= int'(^(r & bf_mask(k, j))) << j;
    return v;
  endfunction
  function automatic bit mhit(row_t r);
    for (int k = 0; k < K; k++) if (!model[h(k, r)]) return 0;
    return 1;
  endfunction
  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    #10000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int fp, tested;
    ins = 0; ins_row = '0; q_row = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      q_row = row_t'($urandom); #1; chk(!hit, "hit in empty filter");
      @(negedge clk);
    end
    for (int i = 0; i < N; i++) begin
      wrow[i] = row_t'($urandom);
      ins = 1; ins_row = wrow[i];
      for (int k = 0; k < K; k++) model[h(k, wrow[i])] = 1;
      @(negedge clk);
    end
    ins = 0;
    foreach (wrow[i]) begin q_row = wrow[i]; #1; chk(hit, $sformatf("weak row %0d missed", wrow[i])); end
    fp = 0; tested = 0;
    for (int i = 0; i < 20000; i++) begin
      bit is_weak;
      is_weak = 0;
      q_row = row_t'($urandom); #1;
      chk(hit == mhit(q_row), $sformatf("row %0d dut=%0b model=%0b", q_row, hit, mhit(q_row)));
      foreach (wrow[j]) if (wrow[j] == q_row) is_weak = 1;
      if (!is_weak) begin tested++; fp += hit; end
    end
    chk(fp * 100 < tested, $sformatf("false positives %0d of %0d", fp, tested));
    $display("false positives: %0d of %0d strong rows", fp, tested);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
