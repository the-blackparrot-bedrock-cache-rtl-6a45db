// bp_cce_directory: the coherence engine's duplicate-tag directory.
//
// One segment per cache type: segment 0 tracks the instruction caches and
// segment 1 the data caches of NUM_CORES cores. LCE ids interleave the two
// types: LCE 2k is core k's I$ and LCE 2k+1 its D$. (The optional accelerator
// segment is not instantiated in the configuration built here.)
//
// The directory takes a physical address, hashes it to a local way group
// (set index with the low log2(NUM_CCE) bits, which select the engine, dropped)
// and to a tag, and routes the operation: way-group reads and row clears go to
// both segments, entry reads and writes only to the segment of lce_i. Results:
//   * sharers vectors indexed by LCE id (hit, way, state), merged from both
//     segments, valid after rdw_done_o;
//   * the LRU address and state of the requester's victim way;
//   * the address and state returned by an entry read (rde_*).
// busy_o is the OR of the segment busy signals. Timing is that of the
// segments: a way-group read takes 1 + NUM_CORES/2 cycles with two tag sets
// per row, writes take one cycle, entry reads two.
module bp_cce_directory
  import bp_cce_pkg::*;
#(
  parameter int unsigned NUM_CORES        = 8,
  parameter int unsigned TAG_SETS_PER_ROW = 2,
  localparam int unsigned NUM_LCE    = 2 * NUM_CORES,
  localparam int unsigned NUM_CCE    = NUM_CORES,
  localparam int unsigned CCE_W      = (NUM_CCE > 1) ? $clog2(NUM_CCE) : 0,
  localparam int unsigned WG_PER_CCE = SETS / NUM_CCE,
  localparam int unsigned WG_W       = (WG_PER_CCE > 1) ? $clog2(WG_PER_CCE) : 1,
  localparam int unsigned CACHE_W    = (NUM_CORES > 1) ? $clog2(NUM_CORES) : 1
) (
  input  logic                            clk_i,
  input  logic                            reset_i,

  input  logic                            v_i,
  input  dir_op_e                         op_i,
  input  logic       [PADDR_W-1:0]        addr_i,
  input  logic       [LCE_ID_W-1:0]       lce_i,
  input  logic       [WAY_W-1:0]          way_i,
  input  logic       [WAY_W-1:0]          lru_way_i,
  input  coh_state_e                      state_i,
  output logic                            busy_o,

  output logic                            rdw_done_o,
  output logic       [NUM_LCE-1:0]        sh_hit_o,
  output logic       [NUM_LCE-1:0][WAY_W-1:0] sh_way_o,
  output coh_state_e [NUM_LCE-1:0]        sh_state_o,
  output logic       [PADDR_W-1:0]        lru_addr_o,
  output coh_state_e                      lru_state_o,

  output logic                            rde_v_o,
  output logic       [PADDR_W-1:0]        rde_addr_o,
  output coh_state_e                      rde_state_o
);

  logic [SET_W-1:0]   set;
  logic [WG_W-1:0]    wg;
  logic [TAG_W-1:0]   tag;
  logic [CACHE_W-1:0] cache;
  logic               ctype;

  assign set   = addr_i[OFFSET_W +: SET_W];
  assign wg    = WG_W'(set >> CCE_W);
  assign tag   = addr_i[PADDR_W-1 -: TAG_W];
  assign cache = CACHE_W'(lce_i >> 1);
  assign ctype = lce_i[0];

  // Remember the set and requester of the last read for address rebuilding
  logic [SET_W-1:0] set_r;
  logic             ctype_r;
  always_ff @(posedge clk_i) begin
    if (reset_i) begin
      set_r   <= '0;
      ctype_r <= 1'b0;
    end else if (v_i && !busy_o && (op_i == DIR_RDW || op_i == DIR_RDE)) begin
      set_r   <= set;
      ctype_r <= ctype;
    end
  end

  logic       [1:0]                          seg_busy, seg_done, seg_rde_v;
  logic       [1:0][NUM_CORES-1:0]           seg_hit;
  logic       [1:0][NUM_CORES-1:0][WAY_W-1:0] seg_way;
  coh_state_e [1:0][NUM_CORES-1:0]           seg_state;
  dir_entry_t [1:0]                          seg_lru, seg_rde;

  for (genvar t = 0; t < 2; t++) begin : g_seg
    logic seg_v;
    assign seg_v = v_i && ((op_i == DIR_RDW) || (op_i == DIR_CLR) || (ctype == 1'(t)));

    bp_cce_dir_segment #(
      .NUM_CACHES(NUM_CORES), .TAG_SETS_PER_ROW(TAG_SETS_PER_ROW), .WG_PER_CCE(WG_PER_CCE)
    ) seg (
      .clk_i, .reset_i,
      .v_i(seg_v), .op_i, .wg_i(wg), .cache_i(cache), .way_i, .lru_way_i,
      .tag_i(tag), .state_i, .busy_o(seg_busy[t]),
      .rdw_done_o(seg_done[t]), .sh_hit_o(seg_hit[t]), .sh_way_o(seg_way[t]),
      .sh_state_o(seg_state[t]), .lru_entry_o(seg_lru[t]),
      .rde_v_o(seg_rde_v[t]), .rde_entry_o(seg_rde[t])
    );

    for (genvar c = 0; c < NUM_CORES; c++) begin : g_lce
      assign sh_hit_o[2*c+t]   = seg_hit[t][c];
      assign sh_way_o[2*c+t]   = seg_way[t][c];
      assign sh_state_o[2*c+t] = seg_state[t][c];
    end
  end

  assign busy_o      = |seg_busy;
  assign rdw_done_o  = seg_done[0];
  assign lru_addr_o  = {seg_lru[ctype_r].tag, set_r, OFFSET_W'(0)};
  assign lru_state_o = seg_lru[ctype_r].state;
  assign rde_v_o     = |seg_rde_v;
  assign rde_addr_o  = {seg_rde[ctype_r].tag, set_r, OFFSET_W'(0)};
  assign rde_state_o = seg_rde[ctype_r].state;

endmodule
