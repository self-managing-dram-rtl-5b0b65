// lrb: Lock Region Bitvector of one SMD bank.
//
// One bit per lock region (16 bits for 16 regions) says whether the region is
// reserved by a maintenance operation. The lock controller sets and clears
// bits; a scrubbing operation sets or clears all of them at once. The lookup
// port answers, combinationally, whether an ACT to row_i must be rejected.
// With the open-bitline array assumed by the paper, neighbouring subarrays
// share sense amplifiers, so a row is also blocked when its subarray is the
// last subarray below or the first subarray above a locked region (a locked
// region of 16 subarrays therefore blocks 18 subarrays). Setting
// OPEN_BITLINE = 0 gives the folded-bitline behaviour (only the region itself).
//
// Timing: set/clear take effect at the next clock edge; blocked_o and bits_o
// reflect the register contents. Reset clears all bits (this design's choice).
module lrb
  import smd_pkg::*;
#(
  parameter bit OPEN_BITLINE = 1'b1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          set_i,
  input  logic          set_all_i,
  input  logic          clr_i,
  input  logic          clr_all_i,
  input  region_t       region_i,
  input  row_t          row_i,
  output logic          blocked_o,
  output logic [REGIONS-1:0] bits_o
);

  logic [REGIONS-1:0] bits_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bits_q <= '0;
    end else begin
      if (clr_all_i)      bits_q <= '0;
      else if (clr_i)     bits_q[region_i] <= 1'b0;
      if (set_all_i)      bits_q <= '1;
      else if (set_i)     bits_q[region_i] <= 1'b1;
    end
  end

  // Lookup: region of the row, and its subarray's position inside the region.
  region_t r;
  logic [ROW_BITS-SA_BITS-REG_BITS-1:0] sa_in_r;
  logic below_locked, above_locked;

  always_comb begin
    r        = region_of(row_i);
    sa_in_r  = row_i[ROW_BITS-REG_BITS-1:SA_BITS];
    // first subarray of region r borders the last subarray of region r-1
    below_locked = OPEN_BITLINE && (r != '0) && (sa_in_r == '0) && bits_q[r - 1'b1];
    // last subarray of region r borders the first subarray of region r+1
    above_locked = OPEN_BITLINE && (r != region_t'(REGIONS-1)) &&
                   (&sa_in_r) && bits_q[r + 1'b1];
    blocked_o = bits_q[r] || below_locked || above_locked;
  end

  assign bits_o = bits_q;

  // a region is never set and cleared in the same cycle
  assert property (@(posedge clk) disable iff (!rst_n) !(set_i && clr_i && !set_all_i && !clr_all_i));
endmodule
