// mc_nack_handler: the memory-controller side of SMD for one channel.
//
// An SMD chip answers a rejected ACT only with a pulse on ACT_NACK, T_NACK
// cycles later, and all chips of the channel share that pin (wired-OR). The
// handler therefore remembers every ACT the controller issues for T_NACK
// cycles and, when ACT_NACK arrives, knows which (rank, bank, row) it refers
// to. It then
//   * records the bank's locked region (1 rank bit + 4 bank bits + 4 region
//     bits per bank, the paper's tracking table) and starts the bank's ACT
//     Retry Interval timer (ARI = 100 cycles = 62.5 ns): an ACT to that region
//     is not allowed again before ARI has passed (act_ok_o), while ACTs to
//     other regions and banks are;
//   * applies the rank's ACT_NACK divergence policy (some chips may have
//     opened the row while others refused):
//       POLICY 0 Precharge: the bank needs a PRE (need_pre_o) and is then
//                precharged; the controller may then try any other row;
//       POLICY 1 Wait:      the bank keeps the partially opened row and must
//                re-issue the same ACT after ARI (wait_row_o);
//       POLICY 2 Hybrid:    Precharge if the scheduler holds at least
//                HYBRID_N requests to other regions of the same bank
//                (other_reqs_i), Wait otherwise.
// An ACT to the recorded region that is not rejected clears the record.
// The request scheduler itself (FR-FCFS-Cap) is outside this block: it issues
// commands (cmd_i, rank_i) and consults act_ok_o / need_pre_o / wait_*.
// Clearing the record on a successful ACT and HYBRID_N = 2 are this design's
// choices.
// With the default Precharge policy the wait_* outputs are constant zero, and
// with the Wait policy need_pre_o is; only Hybrid drives all of them.
module mc_nack_handler
  import smd_pkg::*;
#(
  parameter int unsigned RANKS    = 2,
  parameter int unsigned NB       = smd_pkg::BANKS,
  parameter int unsigned ARI_CYC  = smd_pkg::ARI_CYCLES,
  parameter int unsigned NACK_LAT = smd_pkg::T_NACK,
  parameter int unsigned POLICY   = 0,
  parameter int unsigned HYBRID_N = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  cmd_t cmd_i,                       // command issued this cycle
  input  logic [$clog2(RANKS)-1:0] rank_i,  // its rank
  input  logic nack_i,                      // ACT_NACK pin (wired-OR of all chips)
  input  logic [6:0] other_reqs_i [RANKS*NB],
  // query: may an ACT to (q_rank, q_bank, q_row) be issued now?
  input  logic [$clog2(RANKS)-1:0] q_rank_i,
  input  bank_t q_bank_i,
  input  row_t  q_row_i,
  output logic  act_ok_o,
  // per-bank state
  output logic    trk_valid_o  [RANKS*NB],
  output region_t trk_region_o [RANKS*NB],
  output logic    need_pre_o   [RANKS*NB],
  output logic    wait_valid_o [RANKS*NB],
  output row_t    wait_row_o   [RANKS*NB],
  // event: an ACT_NACK was matched this cycle
  output logic    nack_evt_o,
  output logic    nack_wait_o          // ... and handled with the Wait policy
);
  localparam int unsigned RB   = RANKS * NB;
  localparam int unsigned RB_W = $clog2(RB);
  localparam int unsigned T_W  = $clog2(ARI_CYC + 1);

  typedef struct packed {
    logic             valid;
    logic [RB_W-1:0]  rb;
    row_t             row;
  } pend_t;

  pend_t pend_q [NACK_LAT];

  logic             trk_v_q   [RB];
  region_t          trk_r_q   [RB];
  logic [T_W-1:0]   ari_q     [RB];
  logic             npre_q    [RB];
  logic             wv_q      [RB];
  row_t             wrow_q    [RB];

  logic [RB_W-1:0] rb_in, q_rb;
  assign rb_in = RB_W'(32'(rank_i) * NB + 32'(cmd_i.bank));
  assign q_rb  = RB_W'(32'(q_rank_i) * NB + 32'(q_bank_i));

  pend_t head;
  logic  use_wait;
  assign head = pend_q[NACK_LAT-1];
  always_comb begin
    unique case (POLICY)
      0:       use_wait = 1'b0;
      1:       use_wait = 1'b1;
      default: use_wait = (32'(other_reqs_i[head.rb]) < HYBRID_N);
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NACK_LAT; i++) pend_q[i] <= '0;
      for (int i = 0; i < RB; i++) begin
        trk_v_q[i] <= 1'b0;
        trk_r_q[i] <= '0;
        ari_q[i]   <= '0;
        npre_q[i]  <= 1'b0;
        wv_q[i]    <= 1'b0;
        wrow_q[i]  <= '0;
      end
    end else begin
      // ACTs in flight, waiting for a possible ACT_NACK
      pend_q[0] <= '{valid: cmd_i.cmd == CMD_ACT, rb: rb_in, row: cmd_i.row};
      for (int i = 1; i < NACK_LAT; i++) pend_q[i] <= pend_q[i-1];

      for (int i = 0; i < RB; i++) if (ari_q[i] != '0) ari_q[i] <= ari_q[i] - 1'b1;

      if (head.valid) begin
        if (nack_i) begin
          trk_v_q[head.rb] <= 1'b1;
          trk_r_q[head.rb] <= region_of(head.row);
          ari_q[head.rb]   <= T_W'(ARI_CYC);
          if (use_wait) begin
            wv_q[head.rb]   <= 1'b1;
            wrow_q[head.rb] <= head.row;
          end else begin
            npre_q[head.rb] <= 1'b1;
          end
        end else begin
          if (trk_v_q[head.rb] && trk_r_q[head.rb] == region_of(head.row)) trk_v_q[head.rb] <= 1'b0;
          if (wv_q[head.rb] && wrow_q[head.rb] == head.row) wv_q[head.rb] <= 1'b0;
        end
      end

      if (cmd_i.cmd == CMD_PRE) begin
        npre_q[rb_in] <= 1'b0;
        wv_q[rb_in]   <= 1'b0;
      end
    end
  end

  always_comb begin
    act_ok_o = !(trk_v_q[q_rb] && trk_r_q[q_rb] == region_of(q_row_i) && ari_q[q_rb] != '0)
               && !npre_q[q_rb]
               && !(wv_q[q_rb] && (wrow_q[q_rb] != q_row_i || ari_q[q_rb] != '0));
    for (int i = 0; i < RB; i++) begin
      trk_valid_o[i]  = trk_v_q[i];
      trk_region_o[i] = trk_r_q[i];
      need_pre_o[i]   = npre_q[i];
      wait_valid_o[i] = wv_q[i];
      wait_row_o[i]   = wrow_q[i];
    end
  end

  assign nack_evt_o  = head.valid && nack_i;
  assign nack_wait_o = head.valid && nack_i && use_wait;

  // Every ACT_NACK answers an ACT issued NACK_LAT cycles earlier.
  assert property (@(posedge clk) disable iff (!rst_n) nack_i |-> head.valid);
endmodule
