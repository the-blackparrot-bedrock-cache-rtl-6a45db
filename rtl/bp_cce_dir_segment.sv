// bp_cce_dir_segment: duplicate-tag directory storage for one cache type.
//
// The segment stores the tag sets of NUM_CACHES caches for the WG_PER_CCE way
// groups this engine owns, in a single-ported SRAM whose rows hold
// TAG_SETS_PER_ROW tag sets. The tag set of cache c for way group g lives in
// row (c / TAG_SETS_PER_ROW) * WG_PER_CCE + g at horizontal slot
// c % TAG_SETS_PER_ROW: the rows of one block of caches are consecutive and the
// next block of caches starts WG_PER_CCE rows further down.
//
// Operations (op_i, accepted when v_i=1 and busy_o=0):
//   DIR_RDW  way-group read: streams the NUM_CACHES/TAG_SETS_PER_ROW rows of
//            the way group through the tag checker and the LRU extractor.
//            Occupies 1 + rows cycles; rdw_done_o pulses in the last one and
//            the registered sharers vectors / LRU entry are valid from the
//            next cycle until the next way-group read.
//   DIR_RDE  entry read: rde_v_o and rde_entry_o in the second cycle.
//   DIR_WDE  entry write {tag, state}, DIR_WDS state-only write, DIR_CLR row
//            clear: one cycle each, one per cycle.
// Row layout, one-port SRAM, latencies (writes 1, entry read 2, way-group
// read 1 + rows) follow the paper; the operation encoding and the small
// controlling FSM are this design's own.
module bp_cce_dir_segment
  import bp_cce_pkg::*;
#(
  parameter int unsigned NUM_CACHES       = 8,
  parameter int unsigned TAG_SETS_PER_ROW = 2,
  parameter int unsigned WG_PER_CCE       = 8,
  localparam int unsigned CACHE_W = (NUM_CACHES > 1) ? $clog2(NUM_CACHES) : 1,
  localparam int unsigned WG_W    = (WG_PER_CCE > 1) ? $clog2(WG_PER_CCE) : 1
) (
  input  logic                              clk_i,
  input  logic                              reset_i,

  input  logic                              v_i,
  input  dir_op_e                           op_i,
  input  logic       [WG_W-1:0]             wg_i,
  input  logic       [CACHE_W-1:0]          cache_i,
  input  logic       [WAY_W-1:0]            way_i,
  input  logic       [WAY_W-1:0]            lru_way_i,
  input  logic       [TAG_W-1:0]            tag_i,
  input  coh_state_e                        state_i,
  output logic                              busy_o,

  output logic                              rdw_done_o,
  output logic       [NUM_CACHES-1:0]       sh_hit_o,
  output logic       [NUM_CACHES-1:0][WAY_W-1:0] sh_way_o,
  output coh_state_e [NUM_CACHES-1:0]       sh_state_o,
  output dir_entry_t                        lru_entry_o,

  output logic                              rde_v_o,
  output dir_entry_t                        rde_entry_o
);

  localparam int unsigned BLKS   = (NUM_CACHES + TAG_SETS_PER_ROW - 1) / TAG_SETS_PER_ROW;
  localparam int unsigned ROWS   = BLKS * WG_PER_CCE;
  localparam int unsigned ROW_W  = TAG_SETS_PER_ROW * ASSOC * ENTRY_W;
  localparam int unsigned ADDR_W = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int unsigned HOFF_W = (TAG_SETS_PER_ROW > 1) ? $clog2(TAG_SETS_PER_ROW) : 1;

  typedef enum logic [1:0] {S_IDLE, S_RDW, S_RDE} seg_state_e;
  seg_state_e state_r;

  logic [CACHE_W-1:0] cnt_r;        // row block being read
  logic [WG_W-1:0]    wg_r;
  logic [CACHE_W-1:0] cache_r;
  logic [WAY_W-1:0]   way_r, lru_way_r;
  logic [TAG_W-1:0]   tag_r;

  // SRAM port
  logic              ram_v, ram_w;
  logic [ADDR_W-1:0] ram_addr;
  logic [ROW_W-1:0]  ram_wdata, ram_mask, ram_rdata;

  bp_cce_sram_1rw #(.WIDTH(ROW_W), .DEPTH(ROWS)) sram (
    .clk_i, .v_i(ram_v), .w_i(ram_w), .addr_i(ram_addr),
    .data_i(ram_wdata), .mask_i(ram_mask), .data_o(ram_rdata)
  );

  function automatic logic [ADDR_W-1:0] row_of(logic [CACHE_W-1:0] blk, logic [WG_W-1:0] wg);
    return ADDR_W'(blk * WG_PER_CCE + wg);
  endfunction

  function automatic logic [CACHE_W-1:0] blk_of(logic [CACHE_W-1:0] c);
    return CACHE_W'(int'(c) / TAG_SETS_PER_ROW);
  endfunction

  function automatic logic [HOFF_W-1:0] hoff_of(logic [CACHE_W-1:0] c);
    return HOFF_W'(int'(c) % TAG_SETS_PER_ROW);
  endfunction

  dir_entry_t [TAG_SETS_PER_ROW-1:0][ASSOC-1:0] row;
  assign row = ram_rdata;

  // row checking
  logic       [TAG_SETS_PER_ROW-1:0]            tc_hit;
  logic       [TAG_SETS_PER_ROW-1:0][WAY_W-1:0] tc_way;
  coh_state_e [TAG_SETS_PER_ROW-1:0]            tc_state;
  logic                                         lru_v;
  dir_entry_t                                   lru_entry;

  bp_cce_tag_checker #(.TAG_SETS_PER_ROW(TAG_SETS_PER_ROW)) tag_checker (
    .row_i(row), .tag_i(tag_r), .hit_o(tc_hit), .way_o(tc_way), .state_o(tc_state)
  );

  bp_cce_lru_extract #(.TAG_SETS_PER_ROW(TAG_SETS_PER_ROW), .NUM_CACHES(NUM_CACHES)) lru_extract (
    .row_i(row), .row_blk_i(cnt_r), .cache_i(cache_r), .lru_way_i(lru_way_r),
    .v_o(lru_v), .entry_o(lru_entry)
  );

  assign busy_o     = (state_r != S_IDLE);
  assign rdw_done_o = (state_r == S_RDW) && (cnt_r == CACHE_W'(BLKS - 1));
  assign rde_v_o    = (state_r == S_RDE);
  assign rde_entry_o = row[hoff_of(cache_r)][way_r];

  // SRAM access control
  always_comb begin
    ram_v     = 1'b0;
    ram_w     = 1'b0;
    ram_addr  = row_of(blk_of(cache_i), wg_i);
    ram_wdata = '0;
    ram_mask  = '0;
    if (state_r == S_IDLE && v_i) begin
      unique case (op_i)
        DIR_RDW: begin ram_v = 1'b1; ram_addr = row_of('0, wg_i); end
        DIR_RDE: begin ram_v = 1'b1; end
        DIR_WDE, DIR_WDS: begin
          ram_v = 1'b1;
          ram_w = 1'b1;
          for (int unsigned j = 0; j < TAG_SETS_PER_ROW; j++)
            for (int unsigned w = 0; w < ASSOC; w++) begin
              ram_wdata[(j*ASSOC+w)*ENTRY_W +: ENTRY_W] = {tag_i, state_i};
              if (j == 32'(hoff_of(cache_i)) && w == 32'(way_i))
                ram_mask[(j*ASSOC+w)*ENTRY_W +: ENTRY_W] =
                  (op_i == DIR_WDE) ? {ENTRY_W{1'b1}} : ENTRY_W'({$bits(coh_state_e){1'b1}});
            end
        end
        DIR_CLR: begin ram_v = 1'b1; ram_w = 1'b1; ram_mask = '1; end
        default: ;
      endcase
    end else if (state_r == S_RDW && cnt_r != CACHE_W'(BLKS - 1)) begin
      ram_v    = 1'b1;
      ram_addr = row_of(cnt_r + 1'b1, wg_r);
    end
  end

  always_ff @(posedge clk_i) begin
    if (reset_i) begin
      state_r     <= S_IDLE;
      cnt_r       <= '0;
      wg_r        <= '0;
      cache_r     <= '0;
      way_r       <= '0;
      lru_way_r   <= '0;
      tag_r       <= '0;
      sh_hit_o    <= '0;
      sh_way_o    <= '0;
      sh_state_o  <= '{default: COH_I};
      lru_entry_o <= '0;
    end else begin
      unique case (state_r)
        S_IDLE: if (v_i) begin
          wg_r      <= wg_i;
          cache_r   <= cache_i;
          way_r     <= way_i;
          lru_way_r <= lru_way_i;
          tag_r     <= tag_i;
          cnt_r     <= '0;
          if (op_i == DIR_RDW) begin
            state_r  <= S_RDW;
            sh_hit_o <= '0;
          end else if (op_i == DIR_RDE) begin
            state_r <= S_RDE;
          end
        end
        S_RDW: begin
          for (int unsigned j = 0; j < TAG_SETS_PER_ROW; j++) begin
            if (int'(cnt_r) * TAG_SETS_PER_ROW + j < NUM_CACHES) begin
              sh_hit_o  [int'(cnt_r) * TAG_SETS_PER_ROW + j] <= tc_hit[j];
              sh_way_o  [int'(cnt_r) * TAG_SETS_PER_ROW + j] <= tc_way[j];
              sh_state_o[int'(cnt_r) * TAG_SETS_PER_ROW + j] <= tc_state[j];
            end
          end
          if (lru_v) lru_entry_o <= lru_entry;
          if (cnt_r == CACHE_W'(BLKS - 1)) state_r <= S_IDLE;
          else                             cnt_r   <= cnt_r + 1'b1;
        end
        S_RDE: state_r <= S_IDLE;
        default: state_r <= S_IDLE;
      endcase
    end
  end

endmodule
