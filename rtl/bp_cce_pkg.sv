// bp_cce_pkg: geometry, coherence states and message formats shared by the
// BedRock coherence engine (CCE) and its directory.
//
// Geometry follows the default multicore configuration: 8 cores, each with a
// private instruction and data L1 (16 coherent caches), 8-way caches of 64 sets
// with 64-byte blocks, 28-bit address tags and 3-bit coherence states. The
// 40-bit physical address, the 64-bit network data beat (so N = 8 beats per
// block), the state encoding and the message field layouts are this design's
// own choices; the paper gives the message names but not their formats.
//
// Every message travels as a sequence of beats. Each beat carries the full
// header, one 64-bit data word and a `last` flag. Header-only messages and
// uncached accesses of up to 8 bytes are one beat; block transfers are N beats.
package bp_cce_pkg;

  // ---------------------------------------------------------------- geometry
  localparam int unsigned PADDR_W     = 40;
  localparam int unsigned BLOCK_BYTES = 64;
  localparam int unsigned OFFSET_W    = 6;
  localparam int unsigned SETS        = 64;
  localparam int unsigned SET_W       = 6;
  localparam int unsigned ASSOC       = 8;
  localparam int unsigned WAY_W       = 3;
  localparam int unsigned TAG_W       = PADDR_W - SET_W - OFFSET_W;  // 28
  localparam int unsigned MAX_CORES   = 8;
  localparam int unsigned MAX_LCE     = 2 * MAX_CORES;               // I$ + D$ per core
  localparam int unsigned LCE_ID_W    = 4;
  localparam int unsigned DATA_W      = 64;
  localparam int unsigned BEATS       = BLOCK_BYTES * 8 / DATA_W;    // N = 8
  localparam int unsigned BEAT_W      = 3;

  // Addresses at or above this base are cacheable memory; below it is
  // uncacheable (I/O) space.
  localparam logic [PADDR_W-1:0] CACHEABLE_BASE = 40'h00_8000_0000;

  // ---------------------------------------------------------- coherence state
  typedef enum logic [2:0] {
    COH_I = 3'd0,
    COH_S = 3'd1,
    COH_E = 3'd2,
    COH_F = 3'd3,
    COH_M = 3'd4,
    COH_O = 3'd5
  } coh_state_e;

  typedef struct packed {
    logic [TAG_W-1:0] tag;
    coh_state_e       state;
  } dir_entry_t;

  localparam int unsigned ENTRY_W = $bits(dir_entry_t);  // 31

  // --------------------------------------------------------- LCE requests
  typedef enum logic [2:0] {
    REQ_RD    = 3'd0,  // cached read (ReqRd; ReqRd-NE with non_excl set)
    REQ_WR    = 3'd1,  // cached write (ReqWr)
    REQ_UC_RD = 3'd2,  // uncached load
    REQ_UC_WR = 3'd3,  // uncached store
    REQ_AMO   = 3'd4   // atomic executed at L2 / memory
  } lce_req_type_e;

  typedef struct packed {
    lce_req_type_e         msg_type;
    logic                  non_excl;
    logic                  amo_no_return;
    logic [1:0]            amo_op;
    logic [PADDR_W-1:0]    addr;
    logic [LCE_ID_W-1:0]   lce_id;
    logic [WAY_W-1:0]      lru_way;
  } lce_req_hdr_t;

  typedef struct packed {
    lce_req_hdr_t        hdr;
    logic [DATA_W-1:0]   data;
    logic                last;
  } lce_req_msg_t;

  // --------------------------------------------------------- LCE responses
  typedef enum logic [1:0] {
    RESP_COH_ACK  = 2'd0,
    RESP_INV_ACK  = 2'd1,
    RESP_NULL_WB  = 2'd2,
    RESP_DIRTY_WB = 2'd3
  } lce_resp_type_e;

  typedef struct packed {
    lce_resp_type_e      msg_type;
    logic [PADDR_W-1:0]  addr;
    logic [LCE_ID_W-1:0] src_lce;
  } lce_resp_hdr_t;

  typedef struct packed {
    lce_resp_hdr_t       hdr;
    logic [DATA_W-1:0]   data;
    logic                last;
  } lce_resp_msg_t;

  // --------------------------------------------------------- LCE commands
  typedef enum logic [3:0] {
    CMD_INV       = 4'd0,  // Inv
    CMD_DATA      = 4'd1,  // DATA fill from memory (N beats)
    CMD_UC_DATA   = 4'd2,  // uncached load / atomic result (1 beat)
    CMD_STW       = 4'd3,  // STW: set state and wake up (upgrade)
    CMD_ST_WB     = 4'd4,  // ST-WB: set state, write back
    CMD_TR        = 4'd5,  // TR: transfer, keep state
    CMD_ST_TR     = 4'd6,  // ST-TR: set state, transfer
    CMD_ST_TR_WB  = 4'd7   // ST-TR-WB: set state, transfer, write back
  } lce_cmd_type_e;

  typedef struct packed {
    lce_cmd_type_e        msg_type;
    logic [PADDR_W-1:0]   addr;
    logic [LCE_ID_W-1:0]  dst_lce;
    logic [WAY_W-1:0]     way;
    coh_state_e           state;      // state set at dst_lce
    logic [LCE_ID_W-1:0]  tgt_lce;    // transfer target
    logic [WAY_W-1:0]     tgt_way;
    coh_state_e           tgt_state;  // state attached to the transfer
  } lce_cmd_hdr_t;

  typedef struct packed {
    lce_cmd_hdr_t        hdr;
    logic [DATA_W-1:0]   data;
    logic                last;
  } lce_cmd_msg_t;

  // ------------------------------------------------- memory commands/responses
  typedef enum logic [2:0] {
    MEM_RD    = 3'd0,  // block read (N-beat response)
    MEM_WR    = 3'd1,  // block write-back (N beats, header-only response)
    MEM_UC_RD = 3'd2,
    MEM_UC_WR = 3'd3,
    MEM_AMO   = 3'd4
  } mem_type_e;

  typedef struct packed {
    logic [LCE_ID_W-1:0] lce_id;
    logic [WAY_W-1:0]    way;
    coh_state_e          state;
  } mem_payload_t;

  typedef struct packed {
    mem_type_e           msg_type;
    logic [1:0]          amo_op;
    logic                amo_no_return;
    logic [PADDR_W-1:0]  addr;
    logic                spec;
    mem_payload_t        payload;
  } mem_hdr_t;

  typedef struct packed {
    mem_hdr_t            hdr;
    logic [DATA_W-1:0]   data;
    logic                last;
  } mem_msg_t;

  // --------------------------------------------------------- MSHR flags
  typedef struct packed {
    logic write_not_read;
    logic uncached;
    logic non_exclusive;
    logic atomic;
    logic atomic_no_return;
    logic cacheable_addr;
    logic pending;
    logic cached_shared;
    logic cached_exclusive;
    logic cached_modified;
    logic cached_owned;
    logic cached_forward;
    logic replacement;
    logic upgrade;
  } mshr_flags_t;

  // Speculative bits entry
  typedef struct packed {
    logic       spec;
    logic       squash;
    logic       fwd_mod;
    coh_state_e state;
  } spec_entry_t;

  // Directory segment operations
  typedef enum logic [2:0] {
    DIR_NOP = 3'd0,
    DIR_RDW = 3'd1,  // way-group read
    DIR_RDE = 3'd2,  // entry read
    DIR_WDE = 3'd3,  // entry write (tag and state)
    DIR_WDS = 3'd4,  // state write
    DIR_CLR = 3'd5   // clear physical row
  } dir_op_e;

  function automatic logic is_owner_state(coh_state_e s);
    return (s == COH_E) || (s == COH_M) || (s == COH_O) || (s == COH_F);
  endfunction

endpackage
