`timescale 1ns/1ps
// tb_ra_latch_array: randomized, self-checking test of the per-region row
// address latches. A random stream of MC ACT/PRE commands and maintenance row
// operations (never in the MC's open region, as the lock controller
// guarantees) is applied; a reference model of what each region's local row
// decoder must see is kept and compared with wl_o after every cycle. The test
// also counts cycles in which two regions were driven at once (an MC row and
// a maintenance row), the concurrency the latches exist for.
module tb_ra_latch_array;
  import smd_pkg::*;
  logic clk = 0, rst_n = 0;
  logic mc_act, mc_pre;
  row_t mc_row;
  mop_t mop;
  ra_latch_t wl [REGIONS];
  int checks = 0, failures = 0, both = 0;

  ra_latch_array dut (.clk, .rst_n, .mc_act_i(mc_act), .mc_pre_i(mc_pre), .mc_row_i(mc_row),
                      .mop_i(mop), .wl_o(wl));
  always #5 clk = ~clk;

  // model
  logic mc_open; int mc_reg; int mc_lrow;
  logic m_on;    int m_reg;  int m_lrow;

  initial begin
    #2000000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    mc_act = 0; mc_pre = 0; mc_row = '0; mop = '0;
    mc_open = 0; m_on = 0; mc_reg = 0; mc_lrow = 0; m_reg = 0; m_lrow = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int it = 0; it < 3000; it++) begin
      @(negedge clk);
      mc_act = 0; mc_pre = 0;
      // MC side
      if (!mc_open && $urandom_range(0, 3) == 0) begin
        int g;
        do g = $urandom_range(0, 15); while (m_on && g == m_reg);
        mc_act = 1; mc_row = {region_t'(g), lrow_t'($urandom)};
      end else if (mc_open && $urandom_range(0, 5) == 0) begin
        mc_pre = 1;
      end
      // maintenance side
      if (!m_on && $urandom_range(0, 4) == 0) begin
        int g;
        do g = $urandom_range(0, 15); while ((mc_open && g == mc_reg) || (mc_act && g == int'(region_of(mc_row))));
        mop = '{active: 1, row: {region_t'(g), lrow_t'($urandom)}};
      end else if (m_on && $urandom_range(0, 3) == 0) begin
        mop.active = 0;
      end
      @(posedge clk);
      // model update
      if (mc_act) begin mc_open = 1; mc_reg = region_of(mc_row); mc_lrow = int'(lrow_t'(mc_row)); end
      else if (mc_pre) mc_open = 0;
      m_on = mop.active;
      if (m_on) begin m_reg = region_of(mop.row); m_lrow = int'(lrow_t'(mop.row)); end
      #1;
      for (int g = 0; g < REGIONS; g++) begin
        logic ev; int el; logic em;
        ev = 0; el = 0; em = 0;
        if (mc_open && g == mc_reg) begin ev = 1; el = mc_lrow; em = 0; end
        if (m_on && g == m_reg)     begin ev = 1; el = m_lrow;  em = 1; end
        checks++;
        if (wl[g].valid !== ev || (ev && (int'(wl[g].lrow) != el || wl[g].maint !== em))) begin
          failures++;
          $display("FAIL region %0d: dut v=%0b m=%0b row=%0d, exp v=%0b m=%0b row=%0d", g,
                   wl[g].valid, wl[g].maint, wl[g].lrow, ev, em, el);
        end
      end
      if (mc_open && m_on) both++;
    end
    checks++;
    if (both == 0) begin failures++; $display("FAIL no concurrent MC + maintenance cycle"); end
    $display("concurrent MC and maintenance rows in %0d cycles", both);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
