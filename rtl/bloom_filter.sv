// bloom_filter: per-bank Bloom filter holding the retention-weak rows for
// SMD Variable Refresh.
//
// BF_BITS single-bit cells (8K) and HASHES hash functions (6), the sizes the
// paper evaluates. Inserting a row sets the HASHES cells selected by its
// hashes; a query reports a hit when all of them are set. A hit may be a false
// positive (a strong row refreshed at the weak-row rate) but a weak row never
// misses, which is what refresh correctness needs. Rows are inserted once,
// at manufacturing test, through the insert port; nothing removes them.
//
// The hash functions are H3-style: each output bit is the parity of the row
// address ANDed with a fixed mask (smd_pkg::bf_mask). The paper does not name
// a hash family; this choice is this design's.
// Timing: insert takes effect at the next edge; the query is combinational.
module bloom_filter
  import smd_pkg::*;
#(
  parameter int unsigned BF_BITS = 8192,
  parameter int unsigned HASHES  = 6
) (
  input  logic clk,
  input  logic rst_n,
  input  logic ins_i,
  input  row_t ins_row_i,
  input  row_t q_row_i,
  output logic hit_o
);
  localparam int unsigned IDX_W = $clog2(BF_BITS);

  logic [BF_BITS-1:0] cells_q;

  function automatic logic [IDX_W-1:0] hash(int unsigned k, row_t r);
    logic [IDX_W-1:0] h;
    for (int unsigned j = 0; j < IDX_W; j++) h[j] = ^(r & bf_mask(k, j));
    return h;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cells_q <= '0;
    end else if (ins_i) begin
      for (int unsigned k = 0; k < HASHES; k++) cells_q[hash(k, ins_row_i)] <= 1'b1;
    end
  end

  always_comb begin
    hit_o = 1'b1;
    for (int unsigned k = 0; k < HASHES; k++) hit_o &= cells_q[hash(k, q_row_i)];
  end
endmodule
