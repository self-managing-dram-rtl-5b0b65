// smd_pkg: constants and types shared by the Self-Managing DRAM (SMD) design.
//
// Geometry follows the evaluated DDR4-3200 chip: 16 banks, 128K rows per bank,
// 512-row subarrays and 16 lock regions per bank (so a lock region is 16
// subarrays = 8192 rows). All timing constants are in cycles of the DDR4-3200
// command clock (tCK = 0.625 ns); the conversion from nanoseconds is this
// design's choice, the nanosecond values are the paper's.
//
// Types:
//   cmd_t       decoded DRAM command as seen by one chip (ACT/PRE/RD/WR + address)
//   lock_req_t  a maintenance mechanism asking its bank's lock controller for
//               one region (or, with .all, every region of the bank)
//   lock_rsp_t  one-cycle answer: granted or cannot_lock
//   mop_t       maintenance row operation: while .active the row .row is held
//               open by the maintenance mechanism through its region's latch
//   ra_latch_t  content of one per-region row-address latch
package smd_pkg;

  // ---------------- geometry ----------------
  localparam int unsigned BANKS        = 16;     // 4 bank groups x 4 banks
  localparam int unsigned ROW_BITS     = 17;     // 128K rows per bank
  localparam int unsigned SA_ROWS      = 512;    // rows per subarray
  localparam int unsigned SA_BITS      = 9;      // log2(SA_ROWS)
  localparam int unsigned REGIONS      = 16;     // lock regions per bank
  localparam int unsigned REG_BITS     = 4;      // log2(REGIONS)
  localparam int unsigned LROW_BITS    = ROW_BITS - REG_BITS; // row index inside a region (13)
  localparam int unsigned COL_BITS     = 10;     // column address of a RD/WR
  localparam int unsigned BANK_BITS    = 4;

  // ---------------- SMD interface timing ----------------
  localparam int unsigned ARI_CYCLES   = 100;    // ACT Retry Interval, 62.5 ns
  localparam int unsigned T_NACK       = 5;      // ACT -> ACT_NACK latency in cycles

  // ---------------- maintenance timing ----------------
  localparam int unsigned ROW_REF_CYC    = 80;     // refresh of one row, tRAS+tRP ~ 50 ns
  localparam int unsigned REF_INC_CYC    = 3125;   // PRC increment period: 32 ms / (128K/8)
  localparam int unsigned TREFW_CYCLES = 51_200_000; // 32 ms refresh window

  typedef logic [ROW_BITS-1:0]  row_t;
  typedef logic [REG_BITS-1:0]  region_t;
  typedef logic [LROW_BITS-1:0] lrow_t;
  typedef logic [BANK_BITS-1:0] bank_t;
  typedef logic [COL_BITS-1:0]  col_t;

  typedef enum logic [2:0] {
    CMD_NOP = 3'd0,
    CMD_ACT = 3'd1,
    CMD_PRE = 3'd2,
    CMD_RD  = 3'd3,
    CMD_WR  = 3'd4
  } cmd_e;

  typedef struct packed {
    cmd_e  cmd;
    bank_t bank;
    row_t  row;
    col_t  col;
  } cmd_t;

  typedef struct packed {
    logic    req;     // asking for a lock this cycle (held until granted)
    logic    all;     // lock every region of the bank (scrubbing)
    logic    rel;     // one-cycle pulse: release the lock this requester holds
    region_t region;  // region asked for when !all
  } lock_req_t;

  typedef struct packed {
    logic granted;      // lock taken this cycle
    logic cannot_lock;  // request refused this cycle, retry later
  } lock_rsp_t;

  typedef struct packed {
    logic active;  // maintenance row activation in progress
    row_t row;
  } mop_t;

  typedef struct packed {
    logic  valid;  // latch drives its local row decoder
    logic  maint;  // 1: owned by a maintenance operation, 0: by an MC ACT
    lrow_t lrow;   // row inside the region
  } ra_latch_t;

  // Bloom filter hash masks (H3 family): output bit j of hash k is the parity
  // of (row & bf_mask(k, j)). Masks come from a multiplicative mixing of k, j.
  function automatic row_t bf_mask(int unsigned k, int unsigned j);
    logic [31:0] x;
    x = (32'(k) * 32'd13 + 32'(j) + 32'd1) * 32'h9E37_79B1;
    x = x ^ (x >> 15);
    x = x * 32'h85EB_CA6B;
    x = x ^ (x >> 13);
    return row_t'(x);
  endfunction

  function automatic region_t region_of(row_t r);
    return r[ROW_BITS-1 -: REG_BITS];
  endfunction

  function automatic logic [ROW_BITS-SA_BITS-1:0] subarray_of(row_t r);
    return r[ROW_BITS-1:SA_BITS];
  endfunction

  // Row r lies in region g, or (open-bitline array) in the subarray right
  // below or right above region g, whose sense amplifiers region g shares.
  function automatic logic near_region(row_t r, region_t g, logic open_bitline);
    logic [ROW_BITS-SA_BITS-1:0] sa, first_sa, last_sa;
    sa       = subarray_of(r);
    first_sa = {g, {(ROW_BITS-SA_BITS-REG_BITS){1'b0}}};
    last_sa  = {g, {(ROW_BITS-SA_BITS-REG_BITS){1'b1}}};
    if (region_of(r) == g) return 1'b1;
    if (!open_bitline) return 1'b0;
    return (g != '0 && sa == first_sa - 1'b1) || (g != region_t'(REGIONS-1) && sa == last_sa + 1'b1);
  endfunction

endpackage
