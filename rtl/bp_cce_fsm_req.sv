// bp_cce_fsm_req: request-processing state machine of the FSM coherence engine.
//
// Processes one LCE request at a time, without interruption, and holds it in
// the MSHR (address, type, requester, LRU victim, owner, ways, next states and
// the control flags of the MSHR flag table). It owns the directory and the GAD
// unit. State sequence for a request to cacheable memory:
//
//   READY -> READ_PB -> COH_REQ -> SPEC_RD -> READ_DIR (1 + C/2) -> GAD
//         -> WRITE_NEXT -> [REPL_CMD -> REPL_RESP (1 or N)]
//         -> [INV_CMD (S) -> INV_ACK (S)]
//         -> uncached:  [UC_OWNER_CMD -> UC_OWNER_RESP (1 or N)] -> UC_MEM_CMD
//                       [-> UC_DATA per extra store beat]
//         -> cached:    UPGRADE | TRANSFER [-> TRANSFER_WB (1 or N)] | (none)
//         -> RESOLVE (speculation outcome)                 -> READY
//
// Uncached requests to cacheable memory skip SPEC_RD; an uncached store may
// carry up to N data beats, the first sent with the memory command header and
// the rest streamed from the request queue. Requests to uncacheable
// memory go READY -> UC_REQ [-> UC_DATA per extra beat] -> READY. Every state
// takes one cycle unless it waits for a network, the directory, a memory
// credit. Decisions between states cost nothing.
// With an idle system this gives the occupancies of the paper's FSM column,
// e.g. 8 + C/2 cycles for a read that memory fills and 9 + C/2 for a read
// sourced by an M owner. The one case where the state chart and the occupancy
// table disagree (a transfer from a clean E owner: the chart shows a 1-cycle
// write-back-response state before resolving speculation, the table counts
// 9 + C/2) is resolved in favour of the table: a null write-back response is
// consumed in the same cycle that resolves the speculation.
//
// While the FSM is not itself consuming a response, coherence acknowledgements
// at the head of the response queue are consumed on the side and decrement the
// pending bit of their way group, so acks of finished transactions never block
// the responses the FSM is waiting for. The pending counters have a separate
// decrement port for these acks, so no arbitration is needed.
//
// After reset the FSM clears every directory row (INIT) before accepting
// requests. Structure and state chart follow the paper; the message formats,
// the exact flag equations, the INIT sequence and the handling of acks on the
// side are this design's own.
//
// Some registers are written but never read: the MSHR keeps every flag of the
// paper's flag table and the requester's and victim's states, although the
// FSM branches on only some of them, and the directory's entry-read and busy
// outputs are unused because this FSM never issues an entry read.
module bp_cce_fsm_req
  import bp_cce_pkg::*;
#(
  parameter int unsigned NUM_CORES        = 8,
  parameter int unsigned TAG_SETS_PER_ROW = 2,
  parameter int unsigned CCE_ID           = 0,
  localparam int unsigned NUM_LCE    = 2 * NUM_CORES,
  localparam int unsigned NUM_CCE    = NUM_CORES,
  localparam int unsigned CCE_W      = (NUM_CCE > 1) ? $clog2(NUM_CCE) : 0,
  localparam int unsigned WG_PER_CCE = SETS / NUM_CCE,
  localparam int unsigned WG_W       = (WG_PER_CCE > 1) ? $clog2(WG_PER_CCE) : 1
) (
  input  logic          clk_i,
  input  logic          reset_i,

  // LCE request queue
  input  lce_req_msg_t  req_i,
  input  logic          req_v_i,
  output logic          req_yumi_o,
  // LCE response queue
  input  lce_resp_msg_t resp_i,
  input  logic          resp_v_i,
  output logic          resp_yumi_o,
  // LCE command out
  output lce_cmd_msg_t  cmd_o,
  output logic          cmd_v_o,
  input  logic          cmd_ready_i,
  // memory command out
  output mem_msg_t      mem_cmd_o,
  output logic          mem_cmd_v_o,
  input  logic          mem_cmd_ready_i,

  // pending bits
  output logic            pb_inc_v_o,
  output logic [WG_W-1:0] pb_inc_wg_o,
  output logic            pb_dec_v_o,    // coherence ack consumed
  output logic [WG_W-1:0] pb_dec_wg_o,
  output logic [WG_W-1:0] pb_r_wg_o,
  input  logic            pb_r_pending_i,
  // speculative bits
  output logic            sb_w_v_o,
  output logic [WG_W-1:0] sb_w_wg_o,
  output logic [1:0]      sb_w_op_o,
  output coh_state_e      sb_w_state_o,
  // flow counter
  output logic            fc_inc_o,
  input  logic            fc_full_i,

  output logic            ready_o   // FSM idle in READY
);

  localparam int unsigned BLKS = (NUM_CORES + TAG_SETS_PER_ROW - 1) / TAG_SETS_PER_ROW;
  localparam int unsigned ROWS = BLKS * WG_PER_CCE;
  localparam int unsigned ROW_CNT_W = $clog2(ROWS + 1);
  localparam int unsigned LCE_W = $clog2(NUM_LCE);

  localparam logic [1:0] SPEC_SET = 2'd0, SPEC_SQUASH = 2'd1, SPEC_FWD_MOD = 2'd2, SPEC_FWD = 2'd3;

  typedef enum logic [4:0] {
    S_INIT, S_READY, S_READ_PB, S_COH_REQ, S_SPEC_RD, S_READ_DIR, S_GAD, S_WRITE_NEXT,
    S_REPL_CMD, S_REPL_RESP, S_INV_CMD, S_INV_ACK, S_UC_OWNER_CMD, S_UC_OWNER_RESP,
    S_UC_MEM_CMD, S_UPGRADE, S_TRANSFER, S_TRANSFER_WB, S_RESOLVE, S_UC_REQ, S_UC_DATA
  } state_e;

  state_e state_r, state_n;

  // ------------------------------------------------------------------ MSHR
  lce_req_hdr_t         hdr_r;
  logic [DATA_W-1:0]    data_r;
  logic                 last_r;
  mshr_flags_t          flags_r;
  logic [PADDR_W-1:0]   lru_addr_r;
  coh_state_e           lru_state_r;
  logic [WAY_W-1:0]     req_way_r;        // way the block will occupy at the requester
  coh_state_e           req_state_r;      // requester's current state
  coh_state_e           next_state_r;     // requester's next state
  logic                 owner_v_r;
  logic [LCE_ID_W-1:0]  owner_lce_r;
  logic [WAY_W-1:0]     owner_way_r;
  coh_state_e           owner_state_r;
  coh_state_e           owner_next_state_r;
  logic                 transfer_r;
  logic                 uc_owner_v_r;
  logic [LCE_ID_W-1:0]  uc_owner_lce_r;
  logic [WAY_W-1:0]     uc_owner_way_r;
  logic [NUM_LCE-1:0]   inv_vec_r;
  logic [LCE_W:0]       inv_acks_r;
  logic                 rdw_issued_r;
  logic                 wb_first_r;       // next write-back beat is the first
  logic [ROW_CNT_W-1:0] init_cnt_r;

  // ------------------------------------------------------------- directory
  logic                            dir_v;
  dir_op_e                         dir_op;
  logic       [PADDR_W-1:0]        dir_addr;
  logic       [LCE_ID_W-1:0]       dir_lce;
  logic       [WAY_W-1:0]          dir_way;
  coh_state_e                      dir_state;
  logic                            dir_busy, dir_rdw_done, dir_rde_v;
  logic       [NUM_LCE-1:0]        sh_hit;
  logic       [NUM_LCE-1:0][WAY_W-1:0] sh_way;
  coh_state_e [NUM_LCE-1:0]        sh_state;
  logic       [PADDR_W-1:0]        lru_addr, rde_addr;
  coh_state_e                      lru_state, rde_state;

  bp_cce_directory #(.NUM_CORES(NUM_CORES), .TAG_SETS_PER_ROW(TAG_SETS_PER_ROW)) directory (
    .clk_i, .reset_i,
    .v_i(dir_v), .op_i(dir_op), .addr_i(dir_addr), .lce_i(dir_lce), .way_i(dir_way),
    .lru_way_i(hdr_r.lru_way), .state_i(dir_state), .busy_o(dir_busy),
    .rdw_done_o(dir_rdw_done), .sh_hit_o(sh_hit), .sh_way_o(sh_way), .sh_state_o(sh_state),
    .lru_addr_o(lru_addr), .lru_state_o(lru_state),
    .rde_v_o(dir_rde_v), .rde_addr_o(rde_addr), .rde_state_o(rde_state)
  );

  // ------------------------------------------------------------------- GAD
  logic                 g_req_hit, g_cs, g_ce, g_cm, g_co, g_cf, g_owner_v, g_repl, g_upg, g_xfer;
  logic                 g_uc_owner_v;
  logic [WAY_W-1:0]     g_req_way, g_owner_way, g_uc_owner_way;
  logic [LCE_ID_W-1:0]  g_owner_lce, g_uc_owner_lce;
  coh_state_e           g_req_state, g_owner_state, g_req_next, g_owner_next;
  logic [NUM_LCE-1:0]   g_inv_vec;

  bp_cce_gad #(.NUM_LCE(NUM_LCE)) gad (
    .sh_hit_i(sh_hit), .sh_way_i(sh_way), .sh_state_i(sh_state),
    .req_lce_i(hdr_r.lce_id), .write_i(flags_r.write_not_read),
    .non_excl_i(flags_r.non_exclusive), .uncached_i(flags_r.uncached),
    .lru_state_i(lru_state),
    .req_hit_o(g_req_hit), .req_way_o(g_req_way), .req_state_o(g_req_state),
    .cached_s_o(g_cs), .cached_e_o(g_ce), .cached_m_o(g_cm), .cached_o_o(g_co), .cached_f_o(g_cf),
    .owner_v_o(g_owner_v), .owner_lce_o(g_owner_lce), .owner_way_o(g_owner_way),
    .owner_state_o(g_owner_state), .replacement_o(g_repl), .upgrade_o(g_upg),
    .transfer_o(g_xfer), .inv_vec_o(g_inv_vec), .uc_owner_v_o(g_uc_owner_v),
    .uc_owner_lce_o(g_uc_owner_lce), .uc_owner_way_o(g_uc_owner_way),
    .req_next_state_o(g_req_next), .owner_next_state_o(g_owner_next)
  );

  // ---------------------------------------------------------------- helpers
  function automatic logic [WG_W-1:0] wg_of(logic [PADDR_W-1:0] a);
    return WG_W'(a[OFFSET_W +: SET_W] >> CCE_W);
  endfunction

  function automatic logic cacheable(logic [PADDR_W-1:0] a);
    return a >= CACHEABLE_BASE;
  endfunction

  // state the speculative memory read assumes for the requester
  coh_state_e spec_state;
  assign spec_state = flags_r.write_not_read ? COH_M : (flags_r.non_exclusive ? COH_S : COH_E);

  // Decision chain after WRITE_NEXT; `stage` is the first check still to do.
  function automatic state_e dispatch(int stage);
    if (stage <= 0 && flags_r.replacement)  return S_REPL_CMD;
    if (stage <= 1 && (inv_vec_r != '0))    return S_INV_CMD;
    if (flags_r.uncached)                   return uc_owner_v_r ? S_UC_OWNER_CMD : S_UC_MEM_CMD;
    if (flags_r.upgrade)                    return S_UPGRADE;
    if (transfer_r)                         return S_TRANSFER;
    return S_RESOLVE;
  endfunction

  // lowest pending invalidation target
  logic [LCE_ID_W-1:0] inv_lce;
  always_comb begin
    inv_lce = '0;
    for (int i = NUM_LCE - 1; i >= 0; i--)
      if (inv_vec_r[i]) inv_lce = LCE_ID_W'(i);
  end

  // write-back beat forwarding (replacement, uncached owner, transfer)
  logic wb_fwd_ok;
  assign wb_fwd_ok = mem_cmd_ready_i && (!wb_first_r || !fc_full_i);

  // ------------------------------------------------------------ next state
  logic fsm_pb_w, fsm_resp_yumi;

  always_comb begin
    state_n    = state_r;
    req_yumi_o = 1'b0;
    fsm_resp_yumi = 1'b0;
    cmd_v_o    = 1'b0;
    cmd_o      = '0;
    mem_cmd_v_o = 1'b0;
    mem_cmd_o  = '0;
    fsm_pb_w   = 1'b0;
    pb_r_wg_o  = wg_of(hdr_r.addr);
    sb_w_v_o   = 1'b0;
    sb_w_wg_o  = wg_of(hdr_r.addr);
    sb_w_op_o  = SPEC_SET;
    sb_w_state_o = COH_I;
    fc_inc_o   = 1'b0;
    dir_v      = 1'b0;
    dir_op     = DIR_NOP;
    dir_addr   = hdr_r.addr;
    dir_lce    = hdr_r.lce_id;
    dir_way    = '0;
    dir_state  = COH_I;

    cmd_o.hdr.addr    = hdr_r.addr;
    cmd_o.hdr.dst_lce = hdr_r.lce_id;
    cmd_o.last        = 1'b1;
    mem_cmd_o.hdr.addr = hdr_r.addr;
    mem_cmd_o.last     = 1'b1;

    unique case (state_r)
      S_INIT: begin
        // clear row init_cnt_r in both segments
        dir_v    = 1'b1;
        dir_op   = DIR_CLR;
        dir_addr = '0;
        dir_addr[OFFSET_W +: SET_W] = SET_W'(((int'(init_cnt_r) % WG_PER_CCE) << CCE_W) | CCE_ID);
        dir_lce  = LCE_ID_W'(((int'(init_cnt_r) / WG_PER_CCE) * TAG_SETS_PER_ROW) << 1);
        if (init_cnt_r == ROW_CNT_W'(ROWS - 1)) state_n = S_READY;
      end

      S_READY: if (req_v_i) begin
        req_yumi_o = 1'b1;
        state_n = cacheable(req_i.hdr.addr) ? S_READ_PB : S_UC_REQ;
      end

      S_READ_PB: if (!pb_r_pending_i) begin
        fsm_pb_w = 1'b1;           // transaction opens
        state_n  = S_COH_REQ;
      end

      S_COH_REQ: state_n = flags_r.uncached ? S_READ_DIR : S_SPEC_RD;

      S_SPEC_RD: if (mem_cmd_ready_i && !fc_full_i) begin
        mem_cmd_v_o = 1'b1;
        mem_cmd_o.hdr.msg_type = MEM_RD;
        mem_cmd_o.hdr.addr     = {hdr_r.addr[PADDR_W-1:OFFSET_W], OFFSET_W'(0)};
        mem_cmd_o.hdr.spec     = 1'b1;
        mem_cmd_o.hdr.payload  = '{lce_id: hdr_r.lce_id, way: hdr_r.lru_way, state: spec_state};
        fc_inc_o = 1'b1;
        fsm_pb_w = 1'b1;
        sb_w_v_o = 1'b1;
        sb_w_op_o = SPEC_SET;
        state_n  = S_READ_DIR;
      end

      S_READ_DIR: begin
        if (!rdw_issued_r) begin
          dir_v  = 1'b1;
          dir_op = DIR_RDW;
        end
        if (dir_rdw_done) state_n = S_GAD;
      end

      S_GAD: state_n = S_WRITE_NEXT;

      S_WRITE_NEXT: begin
        if (!flags_r.uncached) begin
          dir_v     = 1'b1;
          dir_op    = DIR_WDE;
          dir_way   = req_way_r;
          dir_state = next_state_r;
        end
        state_n = dispatch(0);
      end

      S_REPL_CMD: if (cmd_ready_i) begin
        cmd_v_o = 1'b1;
        cmd_o.hdr.msg_type = CMD_ST_WB;
        cmd_o.hdr.addr     = lru_addr_r;
        cmd_o.hdr.way      = hdr_r.lru_way;
        cmd_o.hdr.state    = COH_I;
        state_n = S_REPL_RESP;
      end

      S_REPL_RESP, S_UC_OWNER_RESP, S_TRANSFER_WB: begin
        if (resp_v_i && resp_i.hdr.msg_type == RESP_NULL_WB) begin
          fsm_resp_yumi = 1'b1;
          if (state_r == S_REPL_RESP)          state_n = dispatch(1);
          else if (state_r == S_UC_OWNER_RESP) state_n = S_UC_MEM_CMD;
          else begin                           // clean transfer: resolve now
            sb_w_v_o  = 1'b1;
            sb_w_op_o = SPEC_SQUASH;
            state_n   = S_READY;
          end
        end else if (resp_v_i && resp_i.hdr.msg_type == RESP_DIRTY_WB && wb_fwd_ok) begin
          fsm_resp_yumi = 1'b1;
          mem_cmd_v_o = 1'b1;
          mem_cmd_o.hdr.msg_type = MEM_WR;
          mem_cmd_o.hdr.addr     = {resp_i.hdr.addr[PADDR_W-1:OFFSET_W], OFFSET_W'(0)};
          mem_cmd_o.data         = resp_i.data;
          mem_cmd_o.last         = resp_i.last;
          if (wb_first_r) begin
            fc_inc_o = 1'b1;
            fsm_pb_w = 1'b1;
          end
          if (resp_i.last) begin
            if (state_r == S_REPL_RESP)          state_n = dispatch(1);
            else if (state_r == S_UC_OWNER_RESP) state_n = S_UC_MEM_CMD;
            else                                 state_n = S_RESOLVE;
          end
        end
      end

      S_INV_CMD: if (cmd_ready_i) begin
        cmd_v_o = 1'b1;
        cmd_o.hdr.msg_type = CMD_INV;
        cmd_o.hdr.dst_lce  = inv_lce;
        cmd_o.hdr.way      = sh_way[inv_lce[LCE_W-1:0]];
        cmd_o.hdr.state    = COH_I;
        dir_v     = 1'b1;
        dir_op    = DIR_WDS;
        dir_lce   = inv_lce;
        dir_way   = sh_way[inv_lce[LCE_W-1:0]];
        dir_state = COH_I;
        if ((inv_vec_r & ~(NUM_LCE'(1) << inv_lce)) == '0) state_n = S_INV_ACK;
      end

      S_INV_ACK: if (resp_v_i && resp_i.hdr.msg_type == RESP_INV_ACK) begin
        fsm_resp_yumi = 1'b1;
        if (inv_acks_r == 1) state_n = dispatch(2);
      end

      S_UC_OWNER_CMD: if (cmd_ready_i) begin
        cmd_v_o = 1'b1;
        cmd_o.hdr.msg_type = CMD_ST_WB;
        cmd_o.hdr.addr     = {hdr_r.addr[PADDR_W-1:OFFSET_W], OFFSET_W'(0)};
        cmd_o.hdr.dst_lce  = uc_owner_lce_r;
        cmd_o.hdr.way      = uc_owner_way_r;
        cmd_o.hdr.state    = COH_I;
        dir_v     = 1'b1;
        dir_op    = DIR_WDS;
        dir_lce   = uc_owner_lce_r;
        dir_way   = uc_owner_way_r;
        dir_state = COH_I;
        state_n = S_UC_OWNER_RESP;
      end

      // The command's +1 and the end of the uncached request's -1 cancel:
      // no pending-bit write.
      S_UC_MEM_CMD: if (mem_cmd_ready_i && !fc_full_i) begin
        mem_cmd_v_o = 1'b1;
        unique case (hdr_r.msg_type)
          REQ_UC_RD: mem_cmd_o.hdr.msg_type = MEM_UC_RD;
          REQ_UC_WR: mem_cmd_o.hdr.msg_type = MEM_UC_WR;
          default:   mem_cmd_o.hdr.msg_type = MEM_AMO;
        endcase
        mem_cmd_o.hdr.amo_op        = hdr_r.amo_op;
        mem_cmd_o.hdr.amo_no_return = hdr_r.amo_no_return;
        mem_cmd_o.hdr.payload = '{lce_id: hdr_r.lce_id, way: '0, state: COH_I};
        mem_cmd_o.data = data_r;
        mem_cmd_o.last = last_r;
        fc_inc_o = 1'b1;
        state_n  = last_r ? S_READY : S_UC_DATA;
      end

      S_UPGRADE: if (cmd_ready_i) begin
        cmd_v_o = 1'b1;
        cmd_o.hdr.msg_type = CMD_STW;
        cmd_o.hdr.way      = req_way_r;
        cmd_o.hdr.state    = COH_M;
        state_n = S_RESOLVE;
      end

      S_TRANSFER: if (cmd_ready_i) begin
        cmd_v_o = 1'b1;
        cmd_o.hdr.addr      = {hdr_r.addr[PADDR_W-1:OFFSET_W], OFFSET_W'(0)};
        cmd_o.hdr.dst_lce   = owner_lce_r;
        cmd_o.hdr.way       = owner_way_r;
        cmd_o.hdr.state     = owner_next_state_r;
        cmd_o.hdr.tgt_lce   = hdr_r.lce_id;
        cmd_o.hdr.tgt_way   = req_way_r;
        cmd_o.hdr.tgt_state = next_state_r;
        if (flags_r.write_not_read)      cmd_o.hdr.msg_type = CMD_ST_TR;     // ST^I-TR^M
        else if (owner_state_r == COH_E) cmd_o.hdr.msg_type = CMD_ST_TR_WB;  // ST^F-TR^S-WB
        else if (owner_state_r == COH_M) cmd_o.hdr.msg_type = CMD_ST_TR;     // ST^O-TR^S
        else                             cmd_o.hdr.msg_type = CMD_TR;        // TR^S
        dir_v     = 1'b1;
        dir_op    = DIR_WDS;
        dir_lce   = owner_lce_r;
        dir_way   = owner_way_r;
        dir_state = owner_next_state_r;
        state_n = (cmd_o.hdr.msg_type == CMD_ST_TR_WB) ? S_TRANSFER_WB : S_RESOLVE;
      end

      S_RESOLVE: begin
        sb_w_v_o = 1'b1;
        if (flags_r.upgrade || transfer_r) sb_w_op_o = SPEC_SQUASH;
        else if (next_state_r == spec_state) sb_w_op_o = SPEC_FWD;
        else begin
          sb_w_op_o    = SPEC_FWD_MOD;
          sb_w_state_o = next_state_r;
        end
        state_n = S_READY;
      end

      S_UC_REQ: if (mem_cmd_ready_i && !fc_full_i) begin
        mem_cmd_v_o = 1'b1;
        unique case (hdr_r.msg_type)
          REQ_UC_WR: mem_cmd_o.hdr.msg_type = MEM_UC_WR;
          REQ_AMO:   mem_cmd_o.hdr.msg_type = MEM_AMO;
          default:   mem_cmd_o.hdr.msg_type = MEM_UC_RD;
        endcase
        mem_cmd_o.hdr.amo_op        = hdr_r.amo_op;
        mem_cmd_o.hdr.amo_no_return = hdr_r.amo_no_return;
        mem_cmd_o.hdr.payload = '{lce_id: hdr_r.lce_id, way: '0, state: COH_I};
        mem_cmd_o.data = data_r;
        mem_cmd_o.last = last_r;
        fc_inc_o = 1'b1;
        state_n  = last_r ? S_READY : S_UC_DATA;
      end

      S_UC_DATA: if (req_v_i && mem_cmd_ready_i) begin
        req_yumi_o  = 1'b1;
        mem_cmd_v_o = 1'b1;
        mem_cmd_o.hdr.msg_type = MEM_UC_WR;
        mem_cmd_o.hdr.payload  = '{lce_id: hdr_r.lce_id, way: '0, state: COH_I};
        mem_cmd_o.data = req_i.data;
        mem_cmd_o.last = req_i.last;
        if (req_i.last) state_n = S_READY;
      end

      default: state_n = S_READY;
    endcase
  end

  // Coherence acks are consumed on the side whenever the FSM is not itself
  // taking a response from the queue.
  logic ack_sink;
  assign ack_sink = resp_v_i && (resp_i.hdr.msg_type == RESP_COH_ACK) && !fsm_resp_yumi;

  assign resp_yumi_o = fsm_resp_yumi || ack_sink;
  assign pb_inc_v_o  = fsm_pb_w;
  assign pb_inc_wg_o = wg_of(hdr_r.addr);
  assign pb_dec_v_o  = ack_sink;
  assign pb_dec_wg_o = wg_of(resp_i.hdr.addr);

  assign ready_o = (state_r == S_READY);

  // ---------------------------------------------------------- registers
  always_ff @(posedge clk_i) begin
    if (reset_i) begin
      state_r      <= S_INIT;
      init_cnt_r   <= '0;
      hdr_r        <= '0;
      data_r       <= '0;
      last_r       <= 1'b1;
      flags_r      <= '0;
      lru_addr_r   <= '0;
      lru_state_r  <= COH_I;
      req_way_r    <= '0;
      req_state_r  <= COH_I;
      next_state_r <= COH_I;
      owner_v_r    <= 1'b0;
      owner_lce_r  <= '0;
      owner_way_r  <= '0;
      owner_state_r <= COH_I;
      owner_next_state_r <= COH_I;
      transfer_r   <= 1'b0;
      uc_owner_v_r <= 1'b0;
      uc_owner_lce_r <= '0;
      uc_owner_way_r <= '0;
      inv_vec_r    <= '0;
      inv_acks_r   <= '0;
      rdw_issued_r <= 1'b0;
      wb_first_r   <= 1'b1;
    end else begin
      state_r <= state_n;

      if (state_r == S_INIT) init_cnt_r <= init_cnt_r + 1'b1;

      if (state_r == S_READY && req_v_i) begin
        hdr_r  <= req_i.hdr;
        data_r <= req_i.data;
        last_r <= req_i.last;
        flags_r <= '0;
        flags_r.write_not_read   <= (req_i.hdr.msg_type == REQ_WR);
        flags_r.uncached         <= (req_i.hdr.msg_type == REQ_UC_RD)
                                    || (req_i.hdr.msg_type == REQ_UC_WR)
                                    || (req_i.hdr.msg_type == REQ_AMO);
        flags_r.non_exclusive    <= req_i.hdr.non_excl;
        flags_r.atomic           <= (req_i.hdr.msg_type == REQ_AMO);
        flags_r.atomic_no_return <= (req_i.hdr.msg_type == REQ_AMO) && req_i.hdr.amo_no_return;
        flags_r.cacheable_addr   <= cacheable(req_i.hdr.addr);
        rdw_issued_r <= 1'b0;
        wb_first_r   <= 1'b1;
      end

      if (state_r == S_READ_PB) flags_r.pending <= pb_r_pending_i;

      if (state_r == S_READ_DIR && dir_v) rdw_issued_r <= 1'b1;

      if (state_r == S_GAD) begin
        flags_r.cached_shared    <= g_cs;
        flags_r.cached_exclusive <= g_ce;
        flags_r.cached_modified  <= g_cm;
        flags_r.cached_owned     <= g_co;
        flags_r.cached_forward   <= g_cf;
        flags_r.replacement      <= g_repl;
        flags_r.upgrade          <= g_upg;
        lru_addr_r   <= lru_addr;
        lru_state_r  <= lru_state;
        req_way_r    <= g_req_hit ? g_req_way : hdr_r.lru_way;
        req_state_r  <= g_req_state;
        next_state_r <= g_req_next;
        owner_v_r    <= g_owner_v;
        owner_lce_r  <= g_owner_lce;
        owner_way_r  <= g_owner_way;
        owner_state_r <= g_owner_state;
        owner_next_state_r <= g_owner_next;
        transfer_r   <= g_xfer;
        uc_owner_v_r <= g_uc_owner_v;
        uc_owner_lce_r <= g_uc_owner_lce;
        uc_owner_way_r <= g_uc_owner_way;
        inv_vec_r    <= g_inv_vec;
        inv_acks_r   <= '0;
      end

      if (state_r == S_INV_CMD && cmd_v_o) begin
        inv_vec_r[inv_lce[LCE_W-1:0]] <= 1'b0;
      end
      // one ack counted per invalidation sent, one discounted per ack received
      if (state_r == S_INV_CMD && cmd_v_o && !(state_r == S_INV_ACK && fsm_resp_yumi))
        inv_acks_r <= inv_acks_r + 1'b1;
      else if (state_r == S_INV_ACK && fsm_resp_yumi)
        inv_acks_r <= inv_acks_r - 1'b1;

      // write-back forwarding: first beat carries credit and pending increment
      if (mem_cmd_v_o && mem_cmd_o.hdr.msg_type == MEM_WR && fsm_resp_yumi)
        wb_first_r <= mem_cmd_o.last;
    end
  end

endmodule
