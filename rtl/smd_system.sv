// smd_system: one memory channel built from Self-Managing DRAM chips, with
// the memory-controller logic that SMD requires.
//
// RANKS ranks of CHIPS x8 chips (2 x 8 by default: the dual-rank module of the
// evaluated DDR4-3200 system) share the channel's command bus; a chip obeys
// the commands of its own rank. All chips drive one ACT_NACK pin, wired-OR as
// an open-drain pin would be, so a rank that only partly rejected an ACT is
// seen the same as one that fully rejected it. The controller-side
// mc_nack_handler watches the command bus and the pin and tells the request
// scheduler (outside this block, it drives cmd_i/rank_i) which ACTs it may
// issue, which banks need a PRE and which rows must be re-activated.
//
// Every maintenance operation happens inside the chips; the controller
// issues no REF, RFM or scrub commands. The defaults configure each bank as
// the paper's SMD-Combined system: SMD-FR refresh, SMD-DRP RowHammer
// protection and SMD-MS scrubbing, 16 lock regions per bank, ARI = 62.5 ns,
// T_ACT_NACK = 5 cycles. REF_MECH = 1 selects SMD-VR, RH_MECH = 1 SMD-PRP.
// The DRAM arrays (per-region row address latches, wl_o), the on-die ECC
// engines (cw_*, ecc_err_i) and Bloom-filter programming are ports.
// Lint notes: rst_n is both the flops' asynchronous reset and the
// "disable iff" of the protocol assertions, which a linter reports as a
// net used both ways; no flop uses it synchronously. Unconnected debug
// outputs of the mechanisms (counters, drop flags) are left open on purpose.
module smd_system
  import smd_pkg::*;
#(
  parameter int unsigned RANKS       = 2,
  parameter int unsigned CHIPS       = 8,
  parameter int unsigned REF_MECH    = 0,
  parameter int unsigned RH_MECH     = 0,
  parameter bit          SCRUB_EN    = 1'b1,
  parameter int unsigned POLICY      = 0,
  parameter int unsigned T_REF_INC   = smd_pkg::REF_INC_CYC,
  parameter int unsigned T_SCRUB_INC = 3_662_109,
  parameter int unsigned TREFW_CYC   = smd_pkg::TREFW_CYCLES,
  parameter int unsigned CT_ENTRIES  = 1224,
  parameter int unsigned ACT_MAX     = 512
) (
  input  logic       clk,
  input  logic       rst_n,
  // command bus from the request scheduler
  input  cmd_t       cmd_i,
  input  logic [$clog2(RANKS)-1:0] rank_i,
  input  logic [6:0] other_reqs_i [RANKS*BANKS],
  input  logic [$clog2(RANKS)-1:0] q_rank_i,
  input  bank_t      q_bank_i,
  input  row_t       q_row_i,
  output logic       act_ok_o,
  output logic       need_pre_o   [RANKS*BANKS],
  output logic       wait_valid_o [RANKS*BANKS],
  output row_t       wait_row_o   [RANKS*BANKS],
  output logic       trk_valid_o  [RANKS*BANKS],
  output region_t    trk_region_o [RANKS*BANKS],
  output logic       nack_evt_o,
  output logic       nack_wait_o,
  output logic       act_nack_o,                 // the shared pin
  // DRAM arrays
  output ra_latch_t  wl_o      [RANKS][CHIPS][BANKS][REGIONS],
  output logic [REGIONS-1:0] lrb_o [RANKS][CHIPS][BANKS],
  // on-die ECC engines
  output logic       cw_rd_o   [RANKS][CHIPS][BANKS],
  output logic       cw_wr_o   [RANKS][CHIPS][BANKS],
  output row_t       cw_row_o  [RANKS][CHIPS][BANKS],
  output logic [6:0] cw_col_o  [RANKS][CHIPS][BANKS],
  input  logic       ecc_err_i [RANKS][CHIPS][BANKS],
  output row_t       msr_row_o [RANKS][CHIPS][BANKS],
  output logic [7:0] msr_cnt_o [RANKS][CHIPS][BANKS],
  // Bloom filter programming (manufacturing test, SMD-VR)
  input  logic       bf_ins_i,
  input  logic [$clog2(RANKS)-1:0] bf_rank_i,
  input  logic [$clog2(CHIPS)-1:0] bf_chip_i,
  input  bank_t      bf_bank_i,
  input  row_t       bf_row_i,
  output logic [4:0] ev_o      [RANKS][CHIPS][BANKS]
);
  logic [RANKS*CHIPS-1:0] nack_c;

  for (genvar r = 0; r < RANKS; r++) begin : g_rank
    cmd_t rcmd;
    always_comb begin
      rcmd = cmd_i;
      if (rank_i != r) rcmd.cmd = CMD_NOP;
    end
    for (genvar c = 0; c < CHIPS; c++) begin : g_chip
      smd_chip #(
        .REF_MECH(REF_MECH), .RH_MECH(RH_MECH), .SCRUB_EN(SCRUB_EN),
        .T_REF_INC(T_REF_INC), .T_SCRUB_INC(T_SCRUB_INC), .TREFW_CYC(TREFW_CYC),
        .CT_ENTRIES(CT_ENTRIES), .ACT_MAX(ACT_MAX))
      u_chip (
        .clk(clk), .rst_n(rst_n), .seed_i(16'(16'hACE1 + (r * CHIPS + c) * 16'h3B1)), .cmd_i(rcmd), .act_nack_o(nack_c[r*CHIPS+c]),
        .wl_o(wl_o[r][c]), .lrb_o(lrb_o[r][c]),
        .cw_rd_o(cw_rd_o[r][c]), .cw_wr_o(cw_wr_o[r][c]), .cw_row_o(cw_row_o[r][c]),
        .cw_col_o(cw_col_o[r][c]), .ecc_err_i(ecc_err_i[r][c]),
        .msr_row_o(msr_row_o[r][c]), .msr_cnt_o(msr_cnt_o[r][c]),
        .bf_ins_i(bf_ins_i && bf_rank_i == r && bf_chip_i == c), .bf_bank_i(bf_bank_i),
        .bf_row_i(bf_row_i), .ev_o(ev_o[r][c])
      );
    end
  end

  assign act_nack_o = |nack_c;   // open-drain pin shared by all chips

  mc_nack_handler #(.RANKS(RANKS), .POLICY(POLICY)) u_mc (
    .clk(clk), .rst_n(rst_n), .cmd_i(cmd_i), .rank_i(rank_i), .nack_i(act_nack_o),
    .other_reqs_i(other_reqs_i), .q_rank_i(q_rank_i), .q_bank_i(q_bank_i), .q_row_i(q_row_i),
    .act_ok_o(act_ok_o), .trk_valid_o(trk_valid_o), .trk_region_o(trk_region_o),
    .need_pre_o(need_pre_o), .wait_valid_o(wait_valid_o), .wait_row_o(wait_row_o),
    .nack_evt_o(nack_evt_o), .nack_wait_o(nack_wait_o)
  );
endmodule
