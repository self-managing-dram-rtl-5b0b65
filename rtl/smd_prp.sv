// smd_prp: SMD Probabilistic RowHammer Protection (SMD-PRP), PARA done inside
// the DRAM chip, for one bank.
//
// (1) On every accepted ACT the activated row is marked as a possible
//     aggressor with probability P_MARK_Q16/65536 (655/65536 ~ 1 %, the
//     paper's P_mark). Marks live in the Marked Rows Table (MRT): one entry
//     per lock region holding the row's index inside the region (13 bits) and
//     a valid bit.
// (2) While any entry is valid, the entry of the lowest region is handed to
//     the victim refresher, which locks that region,
// (3) refreshes the marked row's neighbours,
// (4) releases the lock; the entry is then unmarked.
// The random numbers come from a 16-bit Galois LFSR (polynomial
// x^16+x^14+x^13+x^11+1) that steps every cycle from SEED; the draw is the
// LFSR XORed with seed_i, a per-bank constant wired by the chip, so that
// banks do not mark in lockstep. (A port rather than a parameter keeps all
// banks one module for synthesis.) A mark for a region whose entry is already valid is dropped, and
// the lowest region is served first; LFSR, dropping and order are this
// design's choices.
// Interface: act_i/act_row_i from the lock controller (accepted ACTs only);
// lreq_o/lrsp_i and mop_o as for every maintenance mechanism.
module smd_prp
  import smd_pkg::*;
#(
  parameter int unsigned P_MARK_Q16 = 655,
  parameter int unsigned BLAST      = 1,
  parameter int unsigned T_ROW_REF  = smd_pkg::ROW_REF_CYC,
  parameter logic [15:0] SEED       = 16'hACE1
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic [15:0] seed_i,
  input  logic      act_i,
  input  row_t      act_row_i,
  output lock_req_t lreq_o,
  input  lock_rsp_t lrsp_i,
  output mop_t      mop_o,
  output logic      mark_o,       // an ACT was marked this cycle
  output logic      served_o      // a marked row's neighbours were refreshed
);
  typedef struct packed {
    logic  valid;
    lrow_t lrow;
  } mrt_entry_t;

  mrt_entry_t  mrt_q [REGIONS];
  logic [15:0] lfsr_q;
  logic        vr_busy, vr_done, start;
  region_t     pick, serving_q;
  logic        any;

  // pick the lowest valid entry
  always_comb begin
    any  = 1'b0;
    pick = '0;
    for (int g = REGIONS-1; g >= 0; g--)
      if (mrt_q[g].valid) begin
        any  = 1'b1;
        pick = region_t'(g);
      end
    start = any && !vr_busy;
  end

  logic do_mark;
  assign do_mark = act_i && (32'(lfsr_q ^ seed_i) < P_MARK_Q16) && !mrt_q[region_of(act_row_i)].valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      lfsr_q    <= SEED;
      serving_q <= '0;
      for (int g = 0; g < REGIONS; g++) mrt_q[g] <= '0;
    end else begin
      lfsr_q <= lfsr_q[0] ? ((lfsr_q >> 1) ^ 16'hB400) : (lfsr_q >> 1);
      if (start) serving_q <= pick;
      if (vr_done) mrt_q[serving_q].valid <= 1'b0;                      // (4)
      if (do_mark)                                                      // (1)
        mrt_q[region_of(act_row_i)] <= '{valid: 1'b1, lrow: lrow_t'(act_row_i)};
    end
  end

  victim_refresher #(.BLAST(BLAST), .T_ROW_REF(T_ROW_REF)) u_vref (     // (2),(3)
    .clk(clk), .rst_n(rst_n), .start_i(start), .aggr_i({pick, mrt_q[pick].lrow}),
    .busy_o(vr_busy), .done_o(vr_done), .lreq_o(lreq_o), .lrsp_i(lrsp_i), .mop_o(mop_o)
  );

  assign mark_o   = do_mark;
  assign served_o = vr_done;
endmodule
