`timescale 1ns/1ps
// tb_smd_ms: self-checking test of SMD-MS (memory scrubbing) for one bank.
// T_SCRUB_INC is shortened to 2000 cycles; the row timing keeps its default
// values (tRCD 22, 128 codewords x 4 cycles, tRP 22, write-back 16). An ECC
// model flags a fixed, row-dependent set of codewords as corrected. Checks:
//   - each scrub operation asks for a lock of all regions and works only
//     while it holds it;
//   - rows are scrubbed in the order {LRC, RAC}: 0, 8192, 16384, ... then 1;
//   - every codeword of the row is read once, in column order, for T_BL
//     cycles, and a codeword flagged by the ECC model is written back for
//     T_WB cycles right after its read;
//   - from grant to release an operation takes T_RCD + 128*T_BL + T_RP =
//     556 cycles plus T_WB per corrected codeword;
//   - the mode-status register holds the row with the most corrections.
module tb_smd_ms;
  import smd_pkg::*;
  localparam int unsigned TINC = 2000, CW = 128, TRCD = 22, TRP = 22, TBL = 4, TWB = 16;
  logic clk = 0, rst_n = 0;
  lock_req_t lreq; lock_rsp_t lrsp; mop_t mop;
  logic rd, wr, err; row_t crow; logic [6:0] ccol; row_t msr_row; logic [7:0] msr_cnt; logic done;
  int checks = 0, failures = 0;

  smd_ms #(.T_SCRUB_INC(TINC)) dut (.clk, .rst_n, .lreq_o(lreq), .lrsp_i(lrsp), .mop_o(mop),
    .cw_rd_o(rd), .cw_wr_o(wr), .cw_row_o(crow), .cw_col_o(ccol), .ecc_err_i(err),
    .msr_row_o(msr_row), .msr_cnt_o(msr_cnt), .op_done_o(done));
  always #5 clk = ~clk;

  function automatic bit errmap(int r, int c);
    return ((r * 7 + c * 13) % 41 == 0) && (r % 3 != 0);
  endfunction
  assign err = rd && errmap(int'(crow), int'(ccol));

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s (t=%0t)", msg, $time); end
  endtask
  initial begin
    #5000000; failures++; $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  logic locked = 0;
  always @(posedge clk) begin
    lrsp <= '0;
    if (lreq.req && !locked && !lrsp.granted && $urandom_range(0, 3) == 0) begin
      chk(lreq.all, "scrub lock request is not for all regions");
      lrsp.granted <= 1; locked <= 1;
    end
    if (lreq.rel || !rst_n) locked <= 0;
  end

  // monitor
  int ops = 0, cyc = 0, exp_col = 0, rd_run = 0, wr_run = 0, nerr = 0, tot_err = 0;
  int best_cnt = 0, best_row = 0;
  logic [6:0] col_d = 0;
  logic in_op = 0, rd_d = 0, wr_d = 0, pend_wb = 0;
  always @(negedge clk) if (rst_n) begin
    if (lrsp.granted) begin in_op = 1; cyc = 0; exp_col = 0; nerr = 0; end
    if (in_op) cyc++;
    if (mop.active || rd || wr) chk(locked, "scrub activity without the lock");
    if (mop.active) chk(int'(mop.row) == ((ops % REGIONS) << LROW_BITS) + ops / REGIONS,
                        $sformatf("op %0d scrubs row %0d", ops, mop.row));
    if (rd_d && (!rd || ccol != col_d)) begin
      chk(rd_run == TBL, $sformatf("read lasted %0d cycles", rd_run));
      rd_run = 0;
      if (errmap(int'(crow), exp_col)) begin pend_wb = 1; nerr++; end
      exp_col++;
    end
    if (rd) begin
      if (!rd_d || ccol != col_d) begin
        chk(!pend_wb, "corrected codeword not written back");
        chk(int'(ccol) == exp_col, $sformatf("read col %0d, expected %0d", ccol, exp_col));
      end
      rd_run++;
    end
    if (wr) begin
      if (!wr_d) chk(pend_wb && int'(ccol) == exp_col - 1, "write-back of a codeword without error");
      pend_wb = 0; wr_run++;
    end
    if (wr_d && !wr) begin chk(wr_run == TWB, $sformatf("write-back lasted %0d cycles", wr_run)); wr_run = 0; end
    if (lreq.rel) begin
      chk(exp_col == CW, $sformatf("%0d codewords read", exp_col));
      chk(cyc == TRCD + CW * TBL + TRP + nerr * TWB + 2,
          $sformatf("op took %0d cycles with %0d corrections", cyc, nerr));
      if (nerr > best_cnt) begin best_cnt = nerr; best_row = int'(crow); end
      tot_err += nerr;
      in_op = 0; ops++;
    end
    rd_d = rd; wr_d = wr; col_d = ccol;
  end

  initial begin
    lrsp = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (40 * TINC) @(negedge clk);
    chk(ops >= 38, $sformatf("%0d scrub ops in 40 periods", ops));
    chk(tot_err > 0, "no corrected codewords exercised");
    chk(int'(msr_cnt) == best_cnt && (best_cnt == 0 || int'(msr_row) == best_row),
        $sformatf("MSR row %0d cnt %0d, expected row %0d cnt %0d", msr_row, msr_cnt, best_row, best_cnt));
    $display("ops=%0d corrections=%0d msr_row=%0d msr_cnt=%0d", ops, tot_err, msr_row, msr_cnt);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
