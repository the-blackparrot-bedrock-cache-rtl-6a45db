// bp_cce_lru_extract: picks the requester's LRU entry out of a directory row.
//
// During a way-group read the rows of a segment stream out one per cycle. Row
// block `row_blk_i` holds the tag sets of caches row_blk_i*TAG_SETS_PER_ROW ..
// +TAG_SETS_PER_ROW-1. When the requesting cache lives in this row, v_o is set
// and entry_o is the {tag, state} stored at the LRU way that the cache sent
// with its request; otherwise v_o is 0. The behaviour follows the paper; the
// combinational implementation is this design's choice.
module bp_cce_lru_extract
  import bp_cce_pkg::*;
#(
  parameter int unsigned TAG_SETS_PER_ROW = 2,
  parameter int unsigned NUM_CACHES       = 8,
  localparam int unsigned CACHE_W = (NUM_CACHES > 1) ? $clog2(NUM_CACHES) : 1
) (
  input  dir_entry_t [TAG_SETS_PER_ROW-1:0][ASSOC-1:0] row_i,
  input  logic       [CACHE_W-1:0]                     row_blk_i,
  input  logic       [CACHE_W-1:0]                     cache_i,
  input  logic       [WAY_W-1:0]                       lru_way_i,
  output logic                                         v_o,
  output dir_entry_t                                   entry_o
);

  localparam int unsigned HOFF_W = (TAG_SETS_PER_ROW > 1) ? $clog2(TAG_SETS_PER_ROW) : 1;

  logic [CACHE_W-1:0] blk;
  logic [HOFF_W-1:0]  hoff;

  always_comb begin
    blk     = CACHE_W'(int'(cache_i) / TAG_SETS_PER_ROW);
    hoff    = HOFF_W'(int'(cache_i) % TAG_SETS_PER_ROW);
    v_o     = (blk == row_blk_i);
    entry_o = row_i[hoff][lru_way_i];
  end

endmodule
