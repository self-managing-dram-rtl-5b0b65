# Self-Managing DRAM in SystemVerilog

A conventional DRAM chip cannot do its own maintenance. The memory controller
must schedule every refresh, decide when to protect rows against RowHammer,
and move data through the channel to scrub it. Each new maintenance need
therefore changes the DRAM standard and the controller.

Self-Managing DRAM (SMD) moves maintenance into the chip. The chip may take a
part of a bank, a **lock region**, out of service for a while and maintain it
there. If the controller tries to activate a row in a locked region, the chip
refuses the activation with a pulse on one new pin, **ACT_NACK**. The
controller then retries later. Nothing else in the interface changes.

This repository holds RTL for one SMD channel, with these parts:

- the per-bank lock machinery (lock controller, lock region bitvector,
  per-region row address latches);
- five maintenance mechanisms built on that machinery:
  - fixed-rate refresh;
  - variable refresh with a Bloom filter of weak rows;
  - probabilistic RowHammer protection;
  - deterministic, Graphene-style RowHammer protection;
  - ECC scrubbing;
- the chip wrapper with the ACT_NACK timing;
- the memory-controller logic that turns ACT_NACK pulses into retry and
  precharge decisions.

## Lock regions and what a lock blocks

A bank has 128K rows: 256 subarrays of 512 rows each. The rows are grouped
into 16 lock regions of 16 subarrays (8192 rows). A row address is therefore
`{region[3:0], subarray-in-region[3:0], row-in-subarray[8:0]}`.

The **lock region bitvector** (`lrb`) holds one bit per region. A bit is set
while a maintenance operation owns that region. A lock of *all* regions sets
every bit; scrubbing uses it, because it needs the bank's shared data path.

An activation is refused when:
- its region is locked; or
- its subarray is the first or last subarray of its region and the
  neighbouring region is locked.

The second rule exists because of open-bitline sense amplifiers: two adjacent
subarrays share a row of sense amplifiers, so the edge subarray of a free
region cannot be opened while the subarray next to it is being refreshed. The
check is `OPEN_BITLINE` in `lrb.sv`. With it, a lock blocks 18 subarrays, not
16.

The **lock controller** (`lock_controller.sv`) owns the bitvector and follows
these rules:

- A bank serves one maintenance lock at a time.
- A lock is refused (`cannot_lock`) while the controller's open row lies in
  the requested region, or next to it across an edge. An all-regions lock is
  refused while any row is open. The requester keeps asking every cycle.
- When a maintenance request and an activation to the same region arrive in
  the same cycle, the maintenance request wins and the activation is refused.
- After a lock on a region is released, that region cannot be locked again
  for ARI cycles. ARI is the ACT Retry Interval, 100 cycles = 62.5 ns at
  DDR4-3200. This lets the controller's retry in. Without the delay, a
  mechanism that relocks immediately could starve the controller. This
  forward-progress guarantee is the central property of the protocol.
- Requester 0 (scrubbing) beats requester 1 (RowHammer), which beats
  requester 2 (refresh). The priority order is this design's choice.

The **row address latches** (`ra_latch_array.sv`) hold one latched local row
address per region. They are what lets a maintenance row in region A and the
controller's open row in region B be active in the same bank at the same
time. `wl_o` shows, for each region, whether a row is driven there and who
owns it. The cell array outside the RTL would consume it.

## The ACT_NACK protocol, end to end

1. The controller issues `ACT` in cycle *t*. A bank whose lock forbids it
   refuses the ACT at once.
2. The chip delays the refusal by T_NACK = 5 cycles and drives ACT_NACK in
   cycle *t*+5. All chips of a channel share the pin as a wired-OR.
3. `mc_nack_handler.sv` keeps every ACT in a 5-stage delay line. A pulse on
   the pin is therefore matched to the rank, bank and row of the ACT issued 5
   cycles before. An assertion checks that a pulse never arrives without an
   ACT.
4. The handler records the refused region for that bank and starts the
   bank's ARI timer. ACTs to other regions and other banks stay allowed;
   `act_ok_o` answers such a query combinationally.
5. Chips of a rank decide independently, so some chips may have opened the
   row while others refused it. The handler resolves this *divergence* with
   one of three policies (`POLICY`):
   - **Precharge (0):** the bank must be precharged (`need_pre_o`), then any
     row may be tried.
   - **Wait (1):** the bank keeps the half-open row and re-issues the same ACT
     after ARI (`wait_row_o`). A chip that already opened the row accepts the
     repeated ACT to the same row.
   - **Hybrid (2):** Precharge when at least `HYBRID_N` = 2 other requests
     wait for the bank, Wait otherwise. `HYBRID_N` is this design's choice.

The request scheduler (FR-FCFS-Cap in the evaluation this design is based
on) is not part of the RTL. The testbenches contain small scheduler models
that use the handler's outputs.

## Maintenance mechanisms

Each mechanism speaks the same small protocol to the lock controller:

- `lreq` carries `{req, all, rel, region}`.
- `lrsp` carries `{granted, cannot_lock}`.
- `mop` carries `{active, row}`, the maintenance row being driven.

The bank merges the `mop`s of its mechanisms. An assertion checks that at
most one is active at a time.

### SMD-FR: fixed-rate refresh (`smd_fr.sv`)

SMD-FR has three counters:
- PRC, the pending refresh count. It grows by one every T_REF_INC = 3125
  cycles and saturates at 8.
- LRC, the lock region counter.
- RAC, the row address counter.

While PRC > 0, SMD-FR:
1. locks region LRC;
2. refreshes the 8 rows `{LRC, RAC..RAC+7}`, 80 cycles (tRAS + tRP, about
   50 ns) each;
3. releases the lock, moves LRC to the next region and decrements PRC.

RAC advances by 8 after every 16 operations. Operations thus rotate over the
regions, and a region is never held for more than 8 row refreshes.

The value 3125 is derived here: 32 ms divided by 16384 operations
(131072 rows / 8) at tCK = 0.625 ns.

### SMD-VR: variable refresh (`smd_vr.sv`, `bloom_filter.sv`)

SMD-VR works like SMD-FR but also keeps RCC, a counter of complete sweeps.
- When RCC is a multiple of 4 (128 ms / 32 ms), every row is refreshed.
- In the other sweeps, only rows reported by the Bloom filter are refreshed.
  The filter holds 8K bits and uses 6 hashes, and holds the weak rows, those
  with retention below 128 ms.

Before locking, SMD-VR tests the 8 candidate rows against the filter, one per
cycle. If none is marked, the region is not locked at all, and the operation
costs the controller nothing.

The hashes are H3-style parity hashes with fixed masks (`smd_pkg::bf_mask`).
The hash family is this design's choice. Weak rows are inserted through a
test port and never removed.

### SMD-PRP: probabilistic RowHammer protection (`smd_prp.sv`)

This is PARA done inside the chip. Every accepted ACT is marked with
probability 655/65536, about 1%. The draw uses a 16-bit Galois LFSR XORed
with a per-bank constant.

A mark goes into the **Marked Rows Table**: one entry per region, holding a
valid bit and the 13-bit row index. The lowest marked region is served first.
The shared `victim_refresher.sv` locks that region, refreshes row−1 and row+1
(more with `BLAST` > 1), and releases the region.

A mark for a region whose entry is still pending is dropped. Neighbours
outside the aggressor's subarray are skipped. Both choices are this
design's.

### SMD-DRP: Graphene in the chip (`smd_drp.sv`)

Per bank, SMD-DRP keeps a Counter Table of 1224 `{row, counter}` entries and
a spillover counter SP. It follows Graphene's algorithm for each ACT:
- On a hit, the row's counter is incremented.
- On a miss with SP equal to the smallest counter, that entry is taken over
  and incremented (to min+1).
- On any other miss, SP is incremented.

When a counter reaches a multiple of ACT_MAX (512), the row's neighbours are
refreshed. Everything is cleared every 32 ms. With more entries than
(ACTs per window / ACT_MAX − 1), no row can reach ACT_MAX activations
unnoticed.

What is hardest here is the search. A CAM over 1224 entries is not built.
Instead:
- The table is 32 lane memories of 39 words each. One word of every lane is
  read per cycle.
- A lookup takes 39 cycles and the update happens 41 cycles after the ACT.
  This is shorter than the minimum time between two ACTs to one bank (tRC,
  about 72 cycles).
- Ties are resolved by the lowest index, for both the hit and the minimum.
- ACTs wait in a 4-entry queue.
- Aggressors wait in a 4-entry queue for the victim refresher.
- The memories are cleared one word per lane per cycle after reset and at
  every window reset.

### SMD-MS: ECC scrubbing (`smd_ms.sv`)

One row is scrubbed every T_SCRUB_INC = 3,662,109 cycles: a 5-minute period
over 128K rows. The walk order is the same as SMD-FR's (region counter
first). Each scrub works as follows:

1. Lock all regions.
2. Activate the row (22 cycles).
3. Read its 128 on-die-ECC codewords, 4 cycles each.
4. After each read, if the ECC engine reports a corrected error
   (`ecc_err_i`, sampled on the last read cycle), write the codeword back
   (16 cycles).
5. Precharge (22 cycles) and release the lock.

A clean row takes 556 cycles, about 350 ns. A mode-status register keeps the
row with the most corrections so far.

## Configurations

`smd_bank`, `smd_chip` and `smd_system` have these parameters:

- `REF_MECH`: 0 = FR, 1 = VR.
- `RH_MECH`: 0 = DRP, 1 = PRP.
- `SCRUB_EN`.
- `POLICY` (on `smd_system` only).

The defaults (FR + DRP + MS, Precharge) are the combined configuration. The
top, `smd_system`, is one channel: 2 ranks of 8 chips of 16 banks. The
evaluated system has 4 channels, which are 4 instances.

| Quantity | Value | Origin |
|---|---|---|
| tCK | 0.625 ns (DDR4-3200) | standard |
| rows / subarray / regions | 131072 / 512 / 16 | evaluation setup |
| ARI | 100 cycles (62.5 ns) | evaluation setup |
| T_NACK | 5 cycles | this design |
| RG, PRC max | 8, 8 | evaluation setup |
| row refresh | 80 cycles (~50 ns) | evaluation setup |
| P_mark | 655/65536 | 1% from the evaluation, quantised here |
| Counter Table / ACT_MAX | 1224 / 512 | evaluation setup |
| scrub row time | 556 cycles (~350 ns) | evaluation figure; split into tRCD/tBL/tRP here |

## Departures from the published design and limits

- The DRAM cell array, sense amplifiers and on-die ECC engine are not RTL
  here. The latches' `wl_o` and the `cw_*`/`ecc_err_i` ports are where they
  would attach.
- The controller's request scheduler is not RTL either. Only the ACT_NACK
  handling is.
- The number of regions is a package constant (`smd_pkg::REGIONS`, with
  `REG_BITS`). The lock-region sweep from 1 to 256 regions needs it changed.
  Any power of two up to the subarray count works.
- Refresh periods of 32, 16 and 8 ms are a change of `T_REF_INC`. At 4 ms,
  one 8-row operation (643 cycles) takes longer than the 390 cycles allowed
  per operation, so SMD-FR would fall behind. Operations within a bank are
  serial here.
- SMD-DRP drops a trigger if four aggressors are already waiting. With the
  table sized by Graphene's rule this does not happen in the tests.
- The design's own choices are: the requester priorities, the same-cycle
  rule that maintenance wins, clearing the controller's region record on a
  successful ACT, the 20-bit counters, and the LFSR and hash functions.
- SMD-PRP+, a counting-Bloom-filter variant, is not built.

## Verification

Every block has a self-checking testbench in `tb/`. Each one prints
`TB_RESULT checks=N failures=M` and ends through a watchdog if it hangs. The
testbenches follow the blocks:

- `tb_lrb` and `tb_lock_controller` check the blocking rules and check the
  ARI hold-off to the cycle.
- `tb_ra_latch_array` runs random concurrent MC and maintenance traffic.
- `tb_smd_fr` and `tb_smd_vr` check the row order, the row timing and PRC
  saturation. `tb_smd_vr` runs five full sweeps against a reference Bloom
  filter.
- `tb_smd_prp` and `tb_smd_drp` check against reference models: an LFSR and
  Marked Rows Table model, and a Graphene model. `tb_smd_drp` also checks the
  guarantee and the window reset.
- `tb_smd_ms` checks codeword order, write-backs, the 556-cycle timing and
  the mode-status register.
- `tb_smd_bank` and `tb_smd_chip` check NACK prediction from the bitvector,
  pin timing, and that no maintenance row runs in the controller's region.
- `tb_mc_nack_handler` checks all three policies against a model, and ARI to
  the cycle.
- `tb_smd_system` is end to end: two reduced systems, one FR+DRP+MS with
  Precharge and one VR+PRP with Hybrid. It counts every mechanism: NACK,
  adjacency NACK, refresh, RowHammer trigger and service, scrub, lock
  refusal, Precharge and Wait handling, and divergence.

No simulation of the top at its full default size (2 ranks of 8 chips, 256
banks with 1224-entry counter tables) is included: its C++ model alone takes
longer than ten minutes to compile. The largest size simulated is
`tb_smd_system`: 2 ranks of 2 chips of 16 banks, with the full 16 regions and
128K rows per bank, and shortened time constants.

The reduced tests shorten time constants (refresh and scrub intervals,
window) through parameters. The logic is the same.

To simulate with Verilator 5:

```
verilator --binary --timing --timescale 1ns/1ps -Wno-fatal -Irtl -y rtl \
          rtl/smd_pkg.sv tb/tb_smd_system.sv --top-module tb_smd_system \
          -Mdir obj -o sim && obj/sim +verilator+rand+reset+2
```

Replace `tb_smd_system` with any other testbench name. `+verilator+rand+reset+2`
starts every flop at a random value, which shows whether reset reaches
everything that is read.
