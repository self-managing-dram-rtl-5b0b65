// lock_controller: the per-bank Lock Controller of an SMD chip.
//
// It owns the bank's Lock Region Bitvector (lrb) and decides two things every
// cycle:
//  * Lock requests from the bank's maintenance mechanisms (NREQ requesters,
//    lowest index has priority). A request is granted only if no lock is held
//    in the bank (one maintenance operation per bank at a time, as in the
//    paper's design), the region has no open row (nor, with the open-bitline
//    array, an open row in a subarray sharing its sense amplifiers), and the
//    region's ARI hold-off has expired. Otherwise the requester gets a
//    one-cycle cannot_lock and may retry. A request with .all locks every
//    region (scrubbing) and needs the bank precharged and no hold-off running.
//  * ACT commands from the memory controller. An ACT whose row is blocked by
//    the LRB, including by a lock granted in the same cycle (maintenance wins a
//    same-cycle race), is rejected: nack_o pulses. An accepted ACT opens the
//    row. An ACT that repeats the row already open is accepted without effect,
//    which lets the memory controller finish a row that only some chips of a
//    rank opened. PRE closes the open row.
// On release (.rel pulse from the holder) the lock bits are cleared and the
// region(s) get a hold-off of ARI_CYCLES*ARI_MULT cycles, during which no new
// lock is granted on them: a memory request retried every ARI therefore finds
// the region free at least once between two maintenance operations.
//
// Timing: lrsp_o, nack_o and act_ok_o are combinational on the cycle of the
// request/command; state changes at the next edge. The ACT_NACK latency seen
// at the pin is added by the chip (smd_chip).
// Which requester wins a tie, and the 'same open row' rule, are this design's
// choices; the rest follows the paper's description of the Lock Controller.
module lock_controller
  import smd_pkg::*;
#(
  parameter int unsigned NREQ         = 3,
  parameter int unsigned ARI_CYC      = ARI_CYCLES,
  parameter int unsigned ARI_MULT     = 1,
  parameter bit          OPEN_BITLINE = 1'b1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  cmd_t                cmd_i,       // command for this bank (cmd_i.cmd == CMD_NOP otherwise)
  input  lock_req_t           lreq_i [NREQ],
  output lock_rsp_t           lrsp_o [NREQ],
  output logic                nack_o,
  output logic                act_ok_o,
  output logic                open_o,
  output row_t                open_row_o,
  output logic [REGIONS-1:0]  lrb_o
);
  localparam int unsigned HOLD     = ARI_CYC * ARI_MULT;
  localparam int unsigned HOLD_W   = $clog2(HOLD + 1);
  localparam int unsigned REQ_W    = (NREQ > 1) ? $clog2(NREQ) : 1;

  logic               open_q;
  row_t               open_row_q;
  logic               held_q, held_all_q;
  logic [REQ_W-1:0]   holder_q;
  region_t            held_region_q;
  logic [HOLD_W-1:0]  hold_q [REGIONS];

  // ---------------- lock arbitration ----------------
  logic             grant, rel_now;
  logic [REQ_W-1:0] win;
  logic             win_valid, feasible, all_free;

  always_comb begin
    win_valid = 1'b0;
    win       = '0;
    for (int i = NREQ-1; i >= 0; i--) begin
      if (lreq_i[i].req) begin
        win_valid = 1'b1;
        win       = REQ_W'(i);
      end
    end
    all_free = 1'b1;
    for (int g = 0; g < REGIONS; g++) if (hold_q[g] != '0) all_free = 1'b0;
    if (lreq_i[win].all)
      feasible = !open_q && all_free;
    else
      feasible = (hold_q[lreq_i[win].region] == '0) &&
                 !(open_q && near_region(open_row_q, lreq_i[win].region, OPEN_BITLINE));
    grant   = win_valid && !held_q && feasible;
    rel_now = held_q && lreq_i[holder_q].rel;
    for (int i = 0; i < NREQ; i++) begin
      lrsp_o[i].granted     = grant && (win == REQ_W'(i));
      lrsp_o[i].cannot_lock = lreq_i[i].req && !(grant && (win == REQ_W'(i)));
    end
  end

  // ---------------- LRB ----------------
  logic lrb_blocked;
  lrb #(.OPEN_BITLINE(OPEN_BITLINE)) u_lrb (
    .clk       (clk),
    .rst_n     (rst_n),
    .set_i     (grant && !lreq_i[win].all),
    .set_all_i (grant && lreq_i[win].all),
    .clr_i     (rel_now && !held_all_q),
    .clr_all_i (rel_now && held_all_q),
    .region_i  (grant ? lreq_i[win].region : held_region_q),
    .row_i     (cmd_i.row),
    .blocked_o (lrb_blocked),
    .bits_o    (lrb_o)
  );

  // ---------------- ACT check ----------------
  logic is_act, same_row, blocked_now;
  always_comb begin
    is_act      = (cmd_i.cmd == CMD_ACT);
    same_row    = open_q && (open_row_q == cmd_i.row);
    blocked_now = lrb_blocked ||
                  (grant && (lreq_i[win].all || near_region(cmd_i.row, lreq_i[win].region, OPEN_BITLINE)));
    act_ok_o    = is_act && (same_row || (!open_q && !blocked_now));
    nack_o      = is_act && !same_row && !open_q && blocked_now;
  end

  // ---------------- state ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      open_q        <= 1'b0;
      open_row_q    <= '0;
      held_q        <= 1'b0;
      held_all_q    <= 1'b0;
      holder_q      <= '0;
      held_region_q <= '0;
      for (int g = 0; g < REGIONS; g++) hold_q[g] <= '0;
    end else begin
      if (act_ok_o && !same_row) begin
        open_q     <= 1'b1;
        open_row_q <= cmd_i.row;
      end else if (cmd_i.cmd == CMD_PRE) begin
        open_q     <= 1'b0;
      end
      for (int g = 0; g < REGIONS; g++)
        if (hold_q[g] != '0) hold_q[g] <= hold_q[g] - 1'b1;
      if (rel_now) begin
        held_q <= 1'b0;
        for (int g = 0; g < REGIONS; g++)
          if (held_all_q || region_t'(g) == held_region_q) hold_q[g] <= HOLD_W'(HOLD);
      end
      if (grant) begin
        held_q        <= 1'b1;
        held_all_q    <= lreq_i[win].all;
        holder_q      <= win;
        held_region_q <= lreq_i[win].region;
      end
    end
  end

  assign open_o     = open_q;
  assign open_row_o = open_row_q;

  // The MC must precharge before activating another row of the bank.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (cmd_i.cmd == CMD_ACT && open_q) |-> open_row_q == cmd_i.row);
  // Only the holder releases.
  for (genvar i = 0; i < NREQ; i++) begin : g_rel_chk
    assert property (@(posedge clk) disable iff (!rst_n)
                     lreq_i[i].rel |-> (held_q && holder_q == REQ_W'(i)));
  end
endmodule
