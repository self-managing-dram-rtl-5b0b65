// smd_chip: a Self-Managing DRAM chip, seen from its command interface.
//
// BANKS independent SMD banks (smd_bank) share the command bus; each bank
// sees only the commands addressed to it. The only interface change SMD
// makes is one output, act_nack_o: when a bank rejects an ACT because its row
// is in (or next to) a locked region, act_nack_o is high for one cycle,
// T_NACK cycles after the ACT (5 cycles by default, as the paper assumes).
// The delay line stands for the chip-internal propagation of the decision to
// the pin; everything else the chip does for maintenance (refresh, RowHammer
// protection, scrubbing) is invisible to the memory controller.
//
// Signals of the DRAM array (per-bank, per-region row-address latches) and of
// the on-die ECC engine (per-bank codeword read/write and error flag) are
// ports, because those parts are outside the digital design. ev_o gathers
// each bank's event bits (see smd_bank) for monitoring.
// Timing: command in cycle t, act_nack_o in cycle t+T_NACK.
module smd_chip
  import smd_pkg::*;
#(
  parameter int unsigned REF_MECH    = 0,
  parameter int unsigned RH_MECH     = 0,
  parameter bit          SCRUB_EN    = 1'b1,
  parameter int unsigned NACK_LAT    = smd_pkg::T_NACK,
  parameter int unsigned T_REF_INC   = smd_pkg::REF_INC_CYC,
  parameter int unsigned T_SCRUB_INC = 3_662_109,
  parameter int unsigned TREFW_CYC   = smd_pkg::TREFW_CYCLES,
  parameter int unsigned CT_ENTRIES  = 1224,
  parameter int unsigned ACT_MAX     = 512
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [15:0] seed_i,      // chip constant; each bank gets its own
  input  cmd_t       cmd_i,
  output logic       act_nack_o,
  output ra_latch_t  wl_o      [BANKS][REGIONS],
  output logic [REGIONS-1:0] lrb_o [BANKS],
  output logic       cw_rd_o   [BANKS],
  output logic       cw_wr_o   [BANKS],
  output row_t       cw_row_o  [BANKS],
  output logic [6:0] cw_col_o  [BANKS],
  input  logic       ecc_err_i [BANKS],
  output row_t       msr_row_o [BANKS],
  output logic [7:0] msr_cnt_o [BANKS],
  input  logic       bf_ins_i,
  input  bank_t      bf_bank_i,
  input  row_t       bf_row_i,
  output logic [4:0] ev_o      [BANKS]
);
  logic [BANKS-1:0] nack_b;

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    cmd_t bcmd;
    always_comb begin
      bcmd = cmd_i;
      if (cmd_i.bank != bank_t'(b)) bcmd.cmd = CMD_NOP;
    end
    smd_bank #(
      .REF_MECH(REF_MECH), .RH_MECH(RH_MECH), .SCRUB_EN(SCRUB_EN),
      .T_REF_INC(T_REF_INC), .T_SCRUB_INC(T_SCRUB_INC), .TREFW_CYC(TREFW_CYC),
      .CT_ENTRIES(CT_ENTRIES), .ACT_MAX(ACT_MAX)
    ) u_bank (
      .clk(clk), .rst_n(rst_n), .seed_i(seed_i ^ 16'(b * 16'h1F35 + 1)), .cmd_i(bcmd),
      .nack_o(nack_b[b]), .act_ok_o(), .wl_o(wl_o[b]), .lrb_o(lrb_o[b]),
      .cw_rd_o(cw_rd_o[b]), .cw_wr_o(cw_wr_o[b]), .cw_row_o(cw_row_o[b]), .cw_col_o(cw_col_o[b]),
      .ecc_err_i(ecc_err_i[b]), .msr_row_o(msr_row_o[b]), .msr_cnt_o(msr_cnt_o[b]),
      .bf_ins_i(bf_ins_i && bf_bank_i == bank_t'(b)), .bf_row_i(bf_row_i), .ev_o(ev_o[b])
    );
  end

  // ACT_NACK latency: NACK_LAT register stages from the bank decision to the pin
  logic [NACK_LAT-1:0] nack_sr;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) nack_sr <= '0;
    else        nack_sr <= {nack_sr[NACK_LAT-2:0], |nack_b};
  end
  assign act_nack_o = nack_sr[NACK_LAT-1];
endmodule
