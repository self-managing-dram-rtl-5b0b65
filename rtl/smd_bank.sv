// smd_bank: one bank of a Self-Managing DRAM chip.
//
// The bank's Lock Controller (with its Lock Region Bitvector) arbitrates
// between three maintenance mechanisms and the memory controller's ACTs:
//   requester 0  scrubbing        SMD-MS  (if SCRUB_EN)
//   requester 1  RowHammer        SMD-DRP (RH_MECH = 0) or SMD-PRP (RH_MECH = 1)
//   requester 2  periodic refresh SMD-FR  (REF_MECH = 0) or SMD-VR (REF_MECH = 1)
// Lower index wins a same-cycle tie (this design's choice). The defaults,
// SMD-FR + SMD-DRP + SMD-MS, are the paper's "SMD-Combined" configuration.
// Only the lock holder drives a maintenance row operation, so the row
// operations are merged by OR-ing under a one-hot check; the merged operation
// and the MC's ACT/PRE go to the per-region row address latches, whose outputs
// (wl_o) drive the local row decoders of the DRAM array outside this block.
//
// Interface: cmd_i carries the commands addressed to this bank (CMD_NOP
// otherwise). nack_o pulses in the cycle of a rejected ACT; the chip delays it
// to the pin. The ECC ports connect scrubbing to the on-die ECC engine; the
// Bloom-filter insert port is only used with SMD-VR. ev_o reports events for
// monitoring: {refresh op done, RowHammer trigger, neighbour refresh done,
// scrub done, cannot_lock answered}.
module smd_bank
  import smd_pkg::*;
#(
  parameter int unsigned REF_MECH   = 0,
  parameter int unsigned RH_MECH    = 0,
  parameter bit          SCRUB_EN   = 1'b1,
  parameter int unsigned T_REF_INC  = smd_pkg::REF_INC_CYC,
  parameter int unsigned T_SCRUB_INC = 3_662_109,
  parameter int unsigned TREFW_CYC  = smd_pkg::TREFW_CYCLES,
  parameter int unsigned CT_ENTRIES = 1224,
  parameter int unsigned ACT_MAX    = 512,
  parameter int unsigned ARI_CYC    = smd_pkg::ARI_CYCLES
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [15:0] seed_i,      // per-bank constant for SMD-PRP's draws
  input  cmd_t       cmd_i,
  output logic       nack_o,
  output logic       act_ok_o,
  output ra_latch_t  wl_o [REGIONS],
  output logic [REGIONS-1:0] lrb_o,
  // on-die ECC engine (scrubbing)
  output logic       cw_rd_o,
  output logic       cw_wr_o,
  output row_t       cw_row_o,
  output logic [6:0] cw_col_o,
  input  logic       ecc_err_i,
  output row_t       msr_row_o,
  output logic [7:0] msr_cnt_o,
  // Bloom filter programming (SMD-VR)
  input  logic       bf_ins_i,
  input  row_t       bf_row_i,
  output logic [4:0] ev_o
);
  localparam int unsigned NREQ = 3;

  lock_req_t lreq [NREQ];
  lock_rsp_t lrsp [NREQ];
  mop_t      mop  [NREQ];
  logic      open;
  row_t      open_row;
  logic      act_new;
  logic      ev_ref, ev_trig, ev_rh, ev_scrub;

  lock_controller #(.NREQ(NREQ), .ARI_CYC(ARI_CYC)) u_lc (
    .clk(clk), .rst_n(rst_n), .cmd_i(cmd_i), .lreq_i(lreq), .lrsp_o(lrsp),
    .nack_o(nack_o), .act_ok_o(act_ok_o), .open_o(open), .open_row_o(open_row), .lrb_o(lrb_o)
  );

  // a new row opened by the MC (a repeated ACT to the open row is not counted)
  assign act_new = act_ok_o && !(open && open_row == cmd_i.row);

  // ---------------- scrubbing ----------------
  if (SCRUB_EN) begin : g_ms
    smd_ms #(.T_SCRUB_INC(T_SCRUB_INC)) u_ms (
      .clk(clk), .rst_n(rst_n), .lreq_o(lreq[0]), .lrsp_i(lrsp[0]), .mop_o(mop[0]),
      .cw_rd_o(cw_rd_o), .cw_wr_o(cw_wr_o), .cw_row_o(cw_row_o), .cw_col_o(cw_col_o),
      .ecc_err_i(ecc_err_i), .msr_row_o(msr_row_o), .msr_cnt_o(msr_cnt_o), .op_done_o(ev_scrub)
    );
  end else begin : g_no_ms
    assign lreq[0] = '0;
    assign mop[0]  = '0;
    assign {cw_rd_o, cw_wr_o, cw_row_o, cw_col_o, msr_row_o, msr_cnt_o, ev_scrub} = '0;
  end

  // ---------------- RowHammer protection ----------------
  if (RH_MECH == 0) begin : g_drp
    smd_drp #(.CT_ENTRIES(CT_ENTRIES), .ACT_MAX(ACT_MAX), .TREFW_CYC(TREFW_CYC)) u_drp (
      .clk(clk), .rst_n(rst_n), .act_i(act_new), .act_row_i(cmd_i.row),
      .lreq_o(lreq[1]), .lrsp_i(lrsp[1]), .mop_o(mop[1]),
      .trigger_o(ev_trig), .served_o(ev_rh), .act_drop_o(), .sp_o()
    );
  end else begin : g_prp
    smd_prp u_prp (
      .clk(clk), .rst_n(rst_n), .seed_i(seed_i), .act_i(act_new), .act_row_i(cmd_i.row),
      .lreq_o(lreq[1]), .lrsp_i(lrsp[1]), .mop_o(mop[1]),
      .mark_o(ev_trig), .served_o(ev_rh)
    );
  end

  // ---------------- periodic refresh ----------------
  if (REF_MECH == 0) begin : g_fr
    smd_fr #(.T_REF_INC(T_REF_INC)) u_fr (
      .clk(clk), .rst_n(rst_n), .lreq_o(lreq[2]), .lrsp_i(lrsp[2]), .mop_o(mop[2]),
      .prc_o(), .lrc_o(), .rac_o(), .op_done_o(ev_ref)
    );
  end else begin : g_vr
    smd_vr #(.T_REF_INC(T_REF_INC)) u_vr (
      .clk(clk), .rst_n(rst_n), .lreq_o(lreq[2]), .lrsp_i(lrsp[2]), .mop_o(mop[2]),
      .bf_ins_i(bf_ins_i), .bf_row_i(bf_row_i), .prc_o(), .rcc_o(), .op_done_o(ev_ref), .skipped_o()
    );
  end

  // ---------------- maintenance row operation merge + RA latches ----------------
  mop_t mop_m;
  always_comb begin
    mop_m = '0;
    for (int i = 0; i < NREQ; i++) if (mop[i].active) mop_m = mop[i];
  end

  ra_latch_array u_ra (
    .clk(clk), .rst_n(rst_n),
    .mc_act_i(act_ok_o), .mc_pre_i(cmd_i.cmd == CMD_PRE), .mc_row_i(cmd_i.row),
    .mop_i(mop_m), .wl_o(wl_o)
  );

  logic any_cannot;
  always_comb begin
    any_cannot = 1'b0;
    for (int i = 0; i < NREQ; i++) any_cannot |= lrsp[i].cannot_lock;
  end
  assign ev_o = {ev_ref, ev_trig, ev_rh, ev_scrub, any_cannot};

  assert property (@(posedge clk) disable iff (!rst_n)
                   $onehot0({mop[0].active, mop[1].active, mop[2].active}));
endmodule
