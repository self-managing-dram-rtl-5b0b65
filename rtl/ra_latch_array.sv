// ra_latch_array: row address multiplexer and per-lock-region row address
// latches of one SMD bank.
//
// A conventional bank has one row address path from the global row decoder to
// all local row decoders. SMD gives every lock region its own row address
// latch, so that a row opened by the memory controller in one region and a row
// opened by a maintenance operation in another region can be driven at the
// same time. The multiplexer in front selects the maintenance row address
// while a maintenance row operation is active and the MC's ACT address
// otherwise; the latch of the addressed region captures the row's index
// inside the region.
//
// Interface: mc_act_i/mc_row_i load the MC's row on an accepted ACT; mc_pre_i
// clears the MC-owned latch. mop_i.active holds the maintenance row open; its
// latch is cleared in the cycle after mop_i.active falls or moves to another
// region. wl_o[g] is what region g's local row decoder sees.
// Timing: latches update at the clock edge after the command.
// The paper says the latch holds a pre-decoded address; the pre-decoding is
// not specified, so the binary row index is stored (this design's choice).
module ra_latch_array
  import smd_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      mc_act_i,
  input  logic      mc_pre_i,
  input  row_t      mc_row_i,
  input  mop_t      mop_i,
  output ra_latch_t wl_o [REGIONS]
);
  ra_latch_t lat_q [REGIONS];

  // row address mux ("maintenance?" select) feeding the global row decoder
  logic  sel_maint;
  row_t  gra;      // global row address after the mux
  assign sel_maint = mop_i.active;
  assign gra       = sel_maint ? mop_i.row : mc_row_i;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < REGIONS; g++) lat_q[g] <= '0;
    end else begin
      for (int g = 0; g < REGIONS; g++) begin
        // maintenance-owned latch: follows the active maintenance row
        if (sel_maint && region_of(gra) == region_t'(g))
          lat_q[g] <= '{valid: 1'b1, maint: 1'b1, lrow: lrow_t'(gra)};
        else if (lat_q[g].maint)
          lat_q[g] <= '0;
        // MC-owned latch
        if (mc_act_i && region_of(mc_row_i) == region_t'(g) &&
            !(sel_maint && region_of(gra) == region_t'(g)))
          lat_q[g] <= '{valid: 1'b1, maint: 1'b0, lrow: lrow_t'(mc_row_i)};
        else if (mc_pre_i && lat_q[g].valid && !lat_q[g].maint)
          lat_q[g] <= '0;
      end
    end
  end

  always_comb for (int g = 0; g < REGIONS; g++) wl_o[g] = lat_q[g];

  // The lock controller never lets the MC and a maintenance operation use the
  // same region at once.
  assert property (@(posedge clk) disable iff (!rst_n)
                   !(mc_act_i && mop_i.active && region_of(mc_row_i) == region_of(mop_i.row)));
endmodule
