`timescale 1ns/1ps
// tb_lrb: self-checking test of the Lock Region Bitvector.
// Random set/clear/set-all/clear-all operations are applied and mirrored in a
// reference model; after each one, rows chosen at region edges and at random
// are looked up and blocked_o is compared with the model's rule: a row is
// blocked if its region is locked, or if its subarray is the subarray right
// next to a locked region (open-bitline array). Subarray numbers in the model
// are computed by integer division, independently of the RTL's bit slicing.
module tb_lrb;
  import smd_pkg::*;
  logic clk = 0, rst_n = 0;
  logic set, set_all, clr, clr_all;
  region_t region;
  row_t row;
  logic blocked;
  logic [REGIONS-1:0] bits;
  int checks = 0, failures = 0;

  lrb dut (.clk, .rst_n, .set_i(set), .set_all_i(set_all), .clr_i(clr), .clr_all_i(clr_all),
           .region_i(region), .row_i(row), .blocked_o(blocked), .bits_o(bits));

  always #5 clk = ~clk;

  logic [REGIONS-1:0] model;

  function automatic logic model_blocked(int unsigned r);
    int unsigned sa  = r / 512;          // subarray
    int unsigned reg_ = r / 8192;        // region
    int unsigned sa_per_reg = 16;
    if (model[reg_]) return 1;
    if (sa % sa_per_reg == 0 && reg_ > 0 && model[reg_-1]) return 1;
    if (sa % sa_per_reg == sa_per_reg-1 && reg_ < 15 && model[reg_+1]) return 1;
    return 0;
  endfunction

  task automatic check_row(int unsigned r);
    row = row_t'(r);
    #1;
    checks++;
    if (blocked !== model_blocked(r)) begin
      failures++;
      $display("FAIL row %0d blocked=%0b expected %0b bits=%h", r, blocked, model_blocked(r), model);
    end
  endtask

  initial begin
    #200000;
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    {set, set_all, clr, clr_all} = '0;
    region = '0; row = '0; model = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int it = 0; it < 400; it++) begin
      int unsigned op;
      op = $urandom_range(0, 9);
      @(negedge clk);
      region = region_t'($urandom_range(0, 15));
      set = (op < 4); clr = (op >= 4 && op < 8); set_all = (op == 8); clr_all = (op == 9);
      @(posedge clk);
      if (op < 4) model[region] = 1;
      else if (op < 8) model[region] = 0;
      else if (op == 8) model = '1;
      else model = '0;
      @(negedge clk);
      {set, set_all, clr, clr_all} = '0;
      checks++;
      if (bits !== model) begin failures++; $display("FAIL bits %h exp %h", bits, model); end
      for (int g = 0; g < 16; g++) begin
        check_row(g * 8192);            // first row of region
        check_row(g * 8192 + 8191);     // last row
        check_row(g * 8192 + 511);      // last row of first subarray
        check_row(g * 8192 + 7680);     // first row of last subarray
      end
      check_row($urandom_range(0, 131071));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
