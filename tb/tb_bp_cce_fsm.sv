// tb_bp_cce_fsm: end-to-end test of the FSM coherence engine at its default
// size (8 cores, 16 caches, 64 sets x 8 ways, 8-beat blocks).
//
// Around the engine sit 16 behavioural cache controllers that follow the
// cache-side BedRock MOESIF table (commands Inv, STW, ST-WB, TR, ST-TR,
// ST-TR-WB, DATA), carry block data, and exchange cache-to-cache transfers
// directly (the Fill network), plus a memory with a fixed latency that can be
// frozen. The test has three parts:
//   1. directed requests on an idle system whose engine occupancy (cycles from
//      accepting the request in READY to returning to READY) is compared with
//      the FSM column of the paper's occupancy table (C = cores, N = beats,
//      S = invalidations), and with the replacement costs 2 and 1 + N;
//   2. a burst of uncached I/O loads while memory responses are frozen, which
//      must exhaust the memory credits;
//   3. random loads, stores, uncached accesses (half of the uncached stores
//      write 2 to N words of a block) and atomics from all caches to
//      a small address pool, checking every loaded value against a reference
//      memory, the single-writer invariant after every command, that commands
//      only arrive in states the cache table allows, and that all pending
//      counters and credits return to zero.
// Each mechanism of the engine is counted and must occur at least once.
module tb_bp_cce_fsm;
  import bp_cce_pkg::*;

  localparam int C       = 8;
  localparam int NLCE    = 2 * C;
  localparam int N       = BEATS;
  localparam int MEM_LAT = 3;
  localparam int RAND_OPS = 4000;

  // state encoding of the request FSM (declaration order)
  localparam int ST_READY = 1, ST_READ_PB = 2;

  logic clk = 1'b0, reset = 1'b1;
  always #5 clk = ~clk;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  int checks = 0, failures = 0;

  // --------------------------------------------------------------- DUT
  lce_req_msg_t  lce_req;   logic lce_req_v,  lce_req_ready;
  lce_resp_msg_t lce_resp;  logic lce_resp_v, lce_resp_ready;
  lce_cmd_msg_t  lce_cmd;   logic lce_cmd_v,  lce_cmd_ready;
  mem_msg_t      mem_cmd;   logic mem_cmd_v,  mem_cmd_ready;
  mem_msg_t      mem_resp;  logic mem_resp_v, mem_resp_ready;
  logic          cce_ready;

  bp_cce_fsm dut (
    .clk_i(clk), .reset_i(reset),
    .lce_req_i(lce_req), .lce_req_v_i(lce_req_v), .lce_req_ready_o(lce_req_ready),
    .lce_resp_i(lce_resp), .lce_resp_v_i(lce_resp_v), .lce_resp_ready_o(lce_resp_ready),
    .lce_cmd_o(lce_cmd), .lce_cmd_v_o(lce_cmd_v), .lce_cmd_ready_i(lce_cmd_ready),
    .mem_cmd_o(mem_cmd), .mem_cmd_v_o(mem_cmd_v), .mem_cmd_ready_i(mem_cmd_ready),
    .mem_resp_i(mem_resp), .mem_resp_v_i(mem_resp_v), .mem_resp_ready_o(mem_resp_ready),
    .ready_o(cce_ready)
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL @%0d: %s", cycle, what);
    end
  endtask

  // ------------------------------------------------------------ memory
  logic [63:0] memw [logic [39:0]];
  logic [63:0] refw [logic [39:0]];

  function automatic logic [63:0] init_word(logic [39:0] a);
    return {24'hC0FFEE, a} ^ 64'h5A5A_0000_0000_0000;
  endfunction
  function automatic logic [63:0] mem_rd(logic [39:0] a);
    return memw.exists(a) ? memw[a] : init_word(a);
  endfunction
  function automatic logic [63:0] ref_rd(logic [39:0] a);
    return refw.exists(a) ? refw[a] : init_word(a);
  endfunction

  typedef struct { mem_msg_t m; longint t; } timed_mem_t;
  timed_mem_t mresp_q[$];
  bit mem_freeze = 0;
  logic [63:0] wb_buf [N];
  int wb_cnt = 0;

  // -------------------------------------------------- cache controllers
  coh_state_e  lst  [NLCE][SETS][ASSOC];
  logic [TAG_W-1:0] ltag [NLCE][SETS][ASSOC];
  logic [63:0] ldat [NLCE][SETS][ASSOC][N];
  logic [63:0] fill_buf [NLCE][N];
  int          fill_cnt [NLCE];

  // one outstanding operation per cache
  typedef enum int {OP_LD, OP_ST, OP_UC_LD, OP_UC_ST, OP_AMO} op_e;
  bit          op_v    [NLCE];
  bit          op_sent [NLCE];
  op_e         op_kind [NLCE];
  logic [39:0] op_addr [NLCE];
  logic [63:0] op_data [NLCE];
  int          op_way  [NLCE];   // forced victim way, -1: choose
  bit          op_ne   [NLCE];
  int          ops_done = 0;

  lce_req_msg_t  req_q[$];
  lce_resp_msg_t resp_q[$];

  function automatic logic [5:0] set_of(logic [39:0] a); return a[11:6]; endfunction
  function automatic logic [TAG_W-1:0] tag_of(logic [39:0] a); return a[39:12]; endfunction
  function automatic logic [39:0] blk_of(logic [39:0] a); return {a[39:6], 6'b0}; endfunction

  function automatic int find_way(int l, logic [39:0] a);
    for (int w = 0; w < ASSOC; w++)
      if (lst[l][set_of(a)][w] != COH_I && ltag[l][set_of(a)][w] == tag_of(a)) return w;
    return -1;
  endfunction

  // mechanism counters
  int n_pb_stall = 0, n_squash = 0, n_fwd_mod = 0, n_fwd = 0, n_repl_clean = 0, n_repl_dirty = 0;
  int n_inv = 0, n_upgrade = 0, n_tr = 0, n_st_tr = 0, n_st_tr_wb = 0, n_xfer_dirty = 0;
  int n_uc_multi_coh = 0, n_uc_multi_io = 0, uc_wbeat = 0;
  int force_beats = 0;   // > 0: beats of the next uncached store, else random
  int n_uc_coh = 0, n_uc_io = 0, n_amo = 0, n_spec_wait = 0, n_fc_full = 0, n_uc_owner_wb = 0;

  // single-writer / single-owner invariant for one block
  task automatic check_swmr(logic [39:0] a);
    int holders = 0, excl = 0, owners = 0;
    for (int l = 0; l < NLCE; l++) begin
      int w = find_way(l, a);
      if (w >= 0) begin
        holders++;
        if (lst[l][set_of(a)][w] inside {COH_E, COH_M}) excl++;
        if (lst[l][set_of(a)][w] inside {COH_E, COH_M, COH_O, COH_F}) owners++;
      end
    end
    check(owners <= 1 && (excl == 0 || holders == 1), $sformatf("SWMR violated for %h", a));
  endtask

  task automatic finish_op(int l, int w);
    logic [39:0] a = op_addr[l];
    logic [2:0]  wi = a[5:3];
    if (op_kind[l] == OP_LD) begin
      check(ldat[l][set_of(a)][w][wi] == ref_rd({a[39:3], 3'b0}),
            $sformatf("load lce %0d addr %h data %h ref %h", l, a, ldat[l][set_of(a)][w][wi],
                      ref_rd({a[39:3], 3'b0})));
    end else begin
      check(lst[l][set_of(a)][w] inside {COH_E, COH_M}, "store without write permission");
      lst[l][set_of(a)][w] = COH_M;
      ldat[l][set_of(a)][w][wi] = op_data[l];
      refw[{a[39:3], 3'b0}] = op_data[l];
      check_swmr(a);
    end
    op_v[l] = 0;
    ops_done++;
  endtask

  function automatic lce_resp_msg_t mk_resp(lce_resp_type_e t, logic [39:0] a, int l,
                                           logic [63:0] d, bit last);
    lce_resp_msg_t r;
    r.hdr.msg_type = t; r.hdr.addr = a; r.hdr.src_lce = LCE_ID_W'(l);
    r.data = d; r.last = last;
    return r;
  endfunction

  // write-back response of cache l for the block at (set, way)
  task automatic push_wb(int l, logic [39:0] a, int w);
    coh_state_e s = lst[l][set_of(a)][w];
    if (s inside {COH_M, COH_O}) begin
      for (int b = 0; b < N; b++)
        resp_q.push_back(mk_resp(RESP_DIRTY_WB, a, l, ldat[l][set_of(a)][w][b], b == N-1));
    end else begin
      resp_q.push_back(mk_resp(RESP_NULL_WB, a, l, '0, 1'b1));
    end
  endtask

  task automatic handle_cmd(lce_cmd_msg_t c);
    int l = int'(c.hdr.dst_lce);
    logic [39:0] a = blk_of(c.hdr.addr);
    int w = int'(c.hdr.way);
    logic [5:0] s = set_of(a);
    unique case (c.hdr.msg_type)
      CMD_DATA: begin
        fill_buf[l][fill_cnt[l]] = c.data;
        fill_cnt[l]++;
        if (c.last) begin
          check(fill_cnt[l] == N, "fill beat count");
          check(op_v[l] && op_sent[l] && blk_of(op_addr[l]) == a, "unexpected fill");
          lst[l][s][w] = c.hdr.state;
          ltag[l][s][w] = tag_of(a);
          for (int b = 0; b < N; b++) ldat[l][s][w][b] = fill_buf[l][b];
          fill_cnt[l] = 0;
          check(op_kind[l] == OP_ST ? c.hdr.state == COH_M : c.hdr.state inside {COH_E, COH_S},
                "fill state");
          check_swmr(a);
          resp_q.push_back(mk_resp(RESP_COH_ACK, a, l, '0, 1'b1));
          finish_op(l, w);
        end
      end
      CMD_UC_DATA: begin
        check(op_v[l] && op_kind[l] inside {OP_UC_LD, OP_AMO}, "unexpected uncached data");
        // the engine serialises the access with every other one to its way
        // group, so the reference still holds the value the memory returned
        if (op_kind[l] == OP_UC_LD) op_data[l] = ref_rd({op_addr[l][39:3], 3'b0});
        check(c.data == op_data[l], $sformatf("uncached load %h got %h exp %h", op_addr[l],
                                              c.data, op_data[l]));
        op_v[l] = 0; ops_done++;
      end
      CMD_INV: begin
        check(lst[l][s][w] inside {COH_S, COH_F, COH_O} && ltag[l][s][w] == tag_of(a),
              "Inv to a block not in S/F/O");
        lst[l][s][w] = COH_I;
        resp_q.push_back(mk_resp(RESP_INV_ACK, a, l, '0, 1'b1));
        n_inv++;
      end
      CMD_STW: begin
        check(lst[l][s][w] inside {COH_S, COH_O, COH_F} && ltag[l][s][w] == tag_of(a),
              "STW to a block not in S/O/F");
        check(op_v[l] && op_kind[l] == OP_ST, "STW without store");
        lst[l][s][w] = c.hdr.state;
        resp_q.push_back(mk_resp(RESP_COH_ACK, a, l, '0, 1'b1));
        n_upgrade++;
        finish_op(l, w);
      end
      CMD_ST_WB: begin
        check(lst[l][s][w] inside {COH_E, COH_M, COH_O} && ltag[l][s][w] == tag_of(a),
              "ST-WB to a block not in E/M/O");
        push_wb(l, a, w);
        lst[l][s][w] = c.hdr.state;
      end
      CMD_TR, CMD_ST_TR, CMD_ST_TR_WB: begin
        int t = int'(c.hdr.tgt_lce);
        int tw = int'(c.hdr.tgt_way);
        check(ltag[l][s][w] == tag_of(a) && lst[l][s][w] != COH_I, "transfer from invalid block");
        if (c.hdr.msg_type == CMD_TR) begin
          check(lst[l][s][w] inside {COH_O, COH_F}, "TR from a block not in O/F");
          n_tr++;
        end else if (c.hdr.msg_type == CMD_ST_TR) begin
          check(lst[l][s][w] inside {COH_E, COH_M, COH_O, COH_F}, "ST-TR state");
          n_st_tr++;
        end else begin
          check(lst[l][s][w] inside {COH_E, COH_M}, "ST-TR-WB from a block not in E/M");
          if (lst[l][s][w] == COH_M) n_xfer_dirty++;
          n_st_tr_wb++;
          push_wb(l, a, w);
        end
        // Fill network: the target receives the block directly
        check(op_v[t] && op_sent[t] && blk_of(op_addr[t]) == a, "unexpected transfer target");
        lst[t][s][tw] = c.hdr.tgt_state;
        ltag[t][s][tw] = tag_of(a);
        for (int b = 0; b < N; b++) ldat[t][s][tw][b] = ldat[l][s][w][b];
        if (c.hdr.msg_type != CMD_TR) lst[l][s][w] = c.hdr.state;
        check_swmr(a);
        resp_q.push_back(mk_resp(RESP_COH_ACK, a, t, '0, 1'b1));
        finish_op(t, tw);
      end
      default: check(0, "unknown command");
    endcase
  endtask

  // start the operation of cache l: hit locally or send a request
  task automatic start_op(int l);
    lce_req_msg_t r;
    logic [39:0] a = op_addr[l];
    int w = find_way(l, a);
    r = '0;
    r.hdr.addr = a;
    r.hdr.lce_id = LCE_ID_W'(l);
    r.last = 1'b1;
    r.data = op_data[l];
    if (op_kind[l] == OP_LD && w >= 0) begin finish_op(l, w); return; end
    if (op_kind[l] == OP_ST && w >= 0 && lst[l][set_of(a)][w] inside {COH_E, COH_M}) begin
      finish_op(l, w); return;
    end
    unique case (op_kind[l])
      OP_LD: begin r.hdr.msg_type = REQ_RD; r.hdr.non_excl = op_ne[l]; end
      OP_ST: r.hdr.msg_type = REQ_WR;
      OP_UC_LD: r.hdr.msg_type = REQ_UC_RD;
      OP_UC_ST: r.hdr.msg_type = REQ_UC_WR;
      default: begin r.hdr.msg_type = REQ_AMO; r.hdr.amo_op = 2'd0; end
    endcase
    if (op_kind[l] inside {OP_LD, OP_ST}) begin
      int v = w;
      if (v < 0) v = op_way[l];
      if (v < 0) begin
        for (int i = ASSOC - 1; i >= 0; i--) if (lst[l][set_of(a)][i] == COH_I) v = i;
        if (v < 0) v = int'($urandom_range(ASSOC - 1));
      end
      r.hdr.lru_way = WAY_W'(v);
    end
    // an uncached store needs no reply; the reference is updated when the
    // memory performs it, as for atomics
    if (op_kind[l] == OP_UC_ST) begin op_v[l] = 0; ops_done++; end
    if (op_kind[l] == OP_UC_LD || op_kind[l] == OP_UC_ST || op_kind[l] == OP_AMO) begin
      if (a >= CACHEABLE_BASE) n_uc_coh++; else n_uc_io++;
      if (op_kind[l] == OP_AMO) n_amo++;
    end
    op_sent[l] = 1;
    // half of the uncached stores write 2..N consecutive words of a block
    if (op_kind[l] == OP_UC_ST && (force_beats > 1 || (force_beats == 0 && $urandom_range(1) == 1))) begin
      automatic int nb = (force_beats > 1) ? force_beats : int'($urandom_range(N, 2));
      r.hdr.addr = {a[39:6], 6'b0};
      r.last = 1'b0;
      req_q.push_back(r);
      for (int b = 1; b < nb; b++) begin
        r.data = {$urandom, $urandom};
        r.last = (b == nb - 1);
        req_q.push_back(r);
      end
      if (a >= CACHEABLE_BASE) n_uc_multi_coh++; else n_uc_multi_io++;
    end else
      req_q.push_back(r);
  endtask

  // ------------------------------------------------ per-cycle behaviour
  always @(posedge clk) begin
    if (!reset) begin
      // handshakes of the cycle that just ended
      if (lce_req_v && lce_req_ready) void'(req_q.pop_front());
      if (lce_resp_v && lce_resp_ready) void'(resp_q.pop_front());
      if (mem_resp_v && mem_resp_ready) void'(mresp_q.pop_front());
      if (lce_cmd_v && lce_cmd_ready) handle_cmd(lce_cmd);
      if (mem_cmd_v && mem_cmd_ready) begin
        automatic mem_msg_t m = mem_cmd;
        automatic mem_msg_t r = mem_cmd;
        automatic logic [39:0] wa = {m.hdr.addr[39:3], 3'b0};
        unique case (m.hdr.msg_type)
          MEM_RD: for (int b = 0; b < N; b++) begin
            r.data = mem_rd({m.hdr.addr[39:6], 3'(b), 3'b0});
            r.last = (b == N - 1);
            mresp_q.push_back('{m: r, t: cycle + longint'(MEM_LAT)});
          end
          MEM_WR: begin
            wb_buf[wb_cnt] = m.data; wb_cnt++;
            if (m.last) begin
              check(wb_cnt == N, "write-back beat count");
              for (int b = 0; b < N; b++) memw[{m.hdr.addr[39:6], 3'(b), 3'b0}] = wb_buf[b];
              wb_cnt = 0;
              r.data = '0;
              mresp_q.push_back('{m: r, t: cycle + longint'(MEM_LAT)});
            end
          end
          MEM_UC_RD: begin
            check(mem_rd(wa) == ref_rd(wa), "memory stale at an uncached load");
            r.data = mem_rd(wa); mresp_q.push_back('{m: r, t: cycle + longint'(MEM_LAT)}); end
          // one response per uncached store, after its last beat
          MEM_UC_WR: begin
            wa = wa + 40'(8 * uc_wbeat);
            memw[wa] = m.data; refw[wa] = m.data;
            uc_wbeat = m.last ? 0 : uc_wbeat + 1;
            r.data = '0;
            if (m.last) mresp_q.push_back('{m: r, t: cycle + longint'(MEM_LAT)});
          end
          default: begin
            automatic int l = int'(m.hdr.payload.lce_id);
            check(mem_rd(wa) == ref_rd(wa), "memory stale at an atomic");
            op_data[l] = ref_rd(wa);
            refw[wa] = ref_rd(wa) + m.data;
            r.data = mem_rd(wa);
            memw[wa] = mem_rd(wa) + m.data;
            mresp_q.push_back('{m: r, t: cycle + longint'(MEM_LAT)});
          end
        endcase
      end
      // start new operations
      for (int l = 0; l < NLCE; l++) if (op_v[l] && !op_sent[l]) start_op(l);
    end
    // drive the next cycle's inputs
    lce_req_v  <= (req_q.size() > 0);
    lce_req    <= (req_q.size() > 0) ? req_q[0] : '0;
    lce_resp_v <= (resp_q.size() > 0);
    lce_resp   <= (resp_q.size() > 0) ? resp_q[0] : '0;
    mem_resp_v <= (mresp_q.size() > 0) && (mresp_q[0].t <= cycle) && !mem_freeze;
    mem_resp   <= (mresp_q.size() > 0) ? mresp_q[0].m : '0;
  end

  assign lce_cmd_ready = 1'b1;
  assign mem_cmd_ready = 1'b1;

  // ---------------------------------------------- mechanism observation
  always @(posedge clk) if (!reset) begin
    if (int'(dut.req_fsm.state_r) == ST_READ_PB && dut.req_fsm.pb_r_pending_i) n_pb_stall++;
    if (dut.sb_w_v && dut.sb_w_op == 2'd1) n_squash++;
    if (dut.sb_w_v && dut.sb_w_op == 2'd2) n_fwd_mod++;
    if (dut.sb_w_v && dut.sb_w_op == 2'd3) n_fwd++;
    if (dut.mresp_q_v && dut.mresp_q.hdr.spec && dut.sb_r_entry.spec
        && dut.mem_resp_fsm.state_r == 0) n_spec_wait++;
    if (dut.fc_full) n_fc_full++;
    if (lce_resp_v && lce_resp_ready && lce_resp.hdr.msg_type == RESP_DIRTY_WB && lce_resp.last
        && int'(dut.req_fsm.state_r) == 9) n_repl_dirty++;
    if (lce_resp_v && lce_resp_ready && lce_resp.hdr.msg_type == RESP_NULL_WB
        && int'(dut.req_fsm.state_r) == 9) n_repl_clean++;
    if (lce_resp_v && lce_resp_ready && lce_resp.last
        && int'(dut.req_fsm.state_r) == 13) n_uc_owner_wb++;
  end

  // optional trace (+trace)
  bit trace_on;
  initial trace_on = $test$plusargs("trace");
  always @(posedge clk) if (trace_on && !reset) begin
    $display("%0d st=%0d mr=%0d inc=%0b/%0d dec=%0b/%0d,%0d req=%0b resp=%0b/%0d cmd=%0b/%0d mc=%0b/%0d mr=%0b",
             cycle, dut.req_fsm.state_r, dut.mem_resp_fsm.state_r, dut.rq_pb_inc_v, dut.rq_pb_inc_wg,
             dut.pending_bits.dec_v_i, dut.pending_bits.dec_wg_i[0], dut.pending_bits.dec_wg_i[1],
             lce_req_v && lce_req_ready, lce_resp_v && lce_resp_ready, lce_resp.hdr.msg_type,
             lce_cmd_v, lce_cmd.hdr.msg_type, mem_cmd_v, mem_cmd.hdr.msg_type, mem_resp_v && mem_resp_ready);
    if (trace_on && dut.mresp_q_v) $display("   mresp spec=%0b sb=%p wg=%0d/%0d dst=%0d st=%0d", dut.mresp_q.hdr.spec, dut.sb_r_entry, dut.sb_r_wg, dut.sb_w_wg, lce_cmd.hdr.dst_lce, lce_cmd.hdr.state);
  end

  // ---------------------------------------------------------- occupancy
  longint occ_t0 = 0, last_occ = 0;
  bit     occ_busy = 0;
  always @(posedge clk) if (!reset) begin
    if (cce_ready && dut.req_fsm.req_yumi_o) begin occ_t0 = cycle; occ_busy = 1; end
    else if (occ_busy && cce_ready) begin last_occ = cycle - occ_t0; occ_busy = 0; end
  end

  function automatic bit idle();
    bit any = 0;
    for (int l = 0; l < NLCE; l++) any |= op_v[l];
    return !any && req_q.size() == 0 && resp_q.size() == 0 && mresp_q.size() == 0
           && cce_ready && !occ_busy && !lce_cmd_v && dut.fc_empty && !dut.mresp_q_v;
  endfunction

  task automatic wait_idle();
    do @(posedge clk); while (!idle());
    repeat (3) @(posedge clk);
  endtask

  task automatic issue(int l, op_e k, logic [39:0] a, logic [63:0] d, int way = -1, bit ne = 0);
    op_kind[l] = k; op_addr[l] = a; op_data[l] = d; op_way[l] = way; op_ne[l] = ne;
    op_sent[l] = 0; op_v[l] = 1;
  endtask

  // one directed request on an idle system, with its expected occupancy
  task automatic directed(string name, int l, op_e k, logic [39:0] a, int exp_occ,
                          int way = -1, bit ne = 0);
    issue(l, k, a, $urandom, way, ne);
    wait_idle();
    check(last_occ == exp_occ, $sformatf("%s: occupancy %0d, expected %0d", name, last_occ, exp_occ));
    $display("occupancy %-34s %3d (expected %3d)", name, last_occ, exp_occ);
  endtask

  // address of block `tag` in local way group `wg` (engine 0 owns sets = 0 mod 8)
  function automatic logic [39:0] baddr(int tag, int wg);
    return {28'(tag) + 28'h80000, 6'(wg * C), 6'b0};
  endfunction

  // ------------------------------------------------------------ stimulus
  initial begin
    for (int l = 0; l < NLCE; l++) begin
      op_v[l] = 0; op_sent[l] = 0; fill_cnt[l] = 0;
      for (int s = 0; s < SETS; s++) for (int w = 0; w < ASSOC; w++) begin
        lst[l][s][w] = COH_I; ltag[l][s][w] = '0;
      end
    end
    lce_req_v = 0; lce_resp_v = 0; mem_resp_v = 0;
    lce_req = '0; lce_resp = '0; mem_resp = '0;
    repeat (5) @(posedge clk);
    reset = 0;
    wait_idle();

    // ---- 1. occupancy on an idle system (C/2 = 4, N = 8)
    directed("Read, dir I (E fill)",         1, OP_LD, baddr(1, 0), 8 + C/2);
    directed("Read, dir E clean",            3, OP_LD, baddr(1, 0), 9 + C/2);
    directed("Read, dir F",                  5, OP_LD, baddr(1, 0), 9 + C/2);
    directed("Write from I, dir F, S=2",     7, OP_ST, baddr(1, 0), 9 + C/2 + 2*2);
    directed("Read, dir M",                  9, OP_LD, baddr(1, 0), 9 + C/2);
    directed("Write from S, dir O (inv O)",  9, OP_ST, baddr(1, 0), 9 + C/2 + 2*1);
    directed("Read, dir M (2)",             11, OP_LD, baddr(1, 0), 9 + C/2);
    directed("Write from O, dir O, S=1",     9, OP_ST, baddr(1, 0), 9 + C/2 + 2*1);
    directed("Read, dir I (B)",              1, OP_LD, baddr(2, 1), 8 + C/2);
    issue(1, OP_ST, baddr(2, 1), 64'h1234); wait_idle();   // silent E -> M
    directed("Read, dir E dirty",            3, OP_LD, baddr(2, 1), 9 + C/2 + N);
    directed("Read NE, dir I",               1, OP_LD, baddr(3, 2), 8 + C/2, -1, 1);
    directed("Read, dir S",                  3, OP_LD, baddr(3, 2), 8 + C/2);
    directed("Write from I, dir S, S=2",     5, OP_ST, baddr(3, 2), 8 + C/2 + 2*2);
    directed("Write from I, dir I",          1, OP_ST, baddr(4, 3), 8 + C/2);
    directed("Write from I, dir M",          3, OP_ST, baddr(4, 3), 9 + C/2);
    directed("Read NE, dir I (E blk)",       1, OP_LD, baddr(5, 4), 8 + C/2, -1, 1);
    directed("Read, dir S (2)",              3, OP_LD, baddr(5, 4), 8 + C/2);
    directed("Write from S, dir S, S=2",     1, OP_ST, baddr(5, 4), 9 + C/2 + 2*(2-1));
    // replacement costs: clean adds 2, dirty adds 1 + N
    directed("Read, dir I (victim)",        13, OP_LD, baddr(6, 5), 8 + C/2, 0);
    directed("Read + clean replacement",    13, OP_LD, baddr(7, 5), 8 + C/2 + 2, 0);
    issue(13, OP_ST, baddr(7, 5), 64'h77); wait_idle();
    directed("Read + dirty replacement",    13, OP_LD, baddr(8, 5), 8 + C/2 + 1 + N, 0);
    directed("Uncached load, I/O space",     2, OP_UC_LD, 40'h00_1000_0040, 2);
    // READY, then one cycle for the header with the first beat and one per
    // additional beat
    force_beats = N;
    directed("Uncached store, I/O, N beats", 2, OP_UC_ST, 40'h00_1000_0080, 1 + N);
    force_beats = 1;
    directed("Uncached store, I/O, 1 beat",  2, OP_UC_ST, 40'h00_1000_0080, 2);
    force_beats = 0;

    // ---- 2. memory credits exhausted by I/O loads behind a frozen memory
    mem_freeze = 1;
    for (int l = 0; l < 12; l++) issue(l, OP_UC_LD, 40'h00_1000_0000 + 40'(l * 8), 0);
    repeat (200) @(posedge clk);
    check(dut.fc_full, "memory credits not exhausted");
    mem_freeze = 0;
    wait_idle();

    // ---- 3. random traffic
    while (ops_done < RAND_OPS + 40) begin
      @(posedge clk);
      for (int l = 0; l < NLCE; l++) if (!op_v[l] && $urandom_range(3) == 0) begin
        automatic int r = int'($urandom_range(99));
        automatic logic [39:0] a = baddr(int'($urandom_range(19)), int'($urandom_range(2)))
                         + 40'(8 * $urandom_range(7));
        automatic int victim = $urandom_range(1) ? int'($urandom_range(ASSOC - 1)) : -1;
        if (r < 45)      issue(l, OP_LD, a, 0, victim, $urandom_range(9) == 0);
        else if (r < 88) issue(l, OP_ST, a, {$urandom, $urandom}, victim);
        else if (r < 92) issue(l, OP_UC_LD, a, 0);
        else if (r < 95) issue(l, OP_UC_ST, a, {$urandom, $urandom});
        else if (r < 98) issue(l, OP_AMO, a, 64'(r));
        else if (r < 99) issue(l, OP_UC_LD, 40'h00_1000_0000 + 40'(8 * $urandom_range(15)), 0);
        else             issue(l, OP_UC_ST, 40'h00_1000_0000 + 40'(8 * $urandom_range(15)),
                               {$urandom, $urandom});
      end
    end
    wait_idle();

    // every cached copy must hold the reference value
    for (int l = 0; l < NLCE; l++)
      for (int s = 0; s < SETS; s++)
        for (int w = 0; w < ASSOC; w++)
          if (lst[l][s][w] != COH_I)
            for (int b = 0; b < N; b++)
              check(ldat[l][s][w][b] == ref_rd({ltag[l][s][w], 6'(s), 3'(b), 3'b0}),
                    "final cached data differs from reference");
    for (int g = 0; g < SETS / C; g++)
      check(dut.pending_bits.cnt_r[g] == 0, "pending counter not zero at end");
    check(dut.fc_empty, "memory credits not returned");

    // ---- mechanisms
    $display("pending stalls %0d, squash %0d, fwd_mod %0d, fwd %0d, spec waits %0d, credit-full %0d",
             n_pb_stall, n_squash, n_fwd_mod, n_fwd, n_spec_wait, n_fc_full);
    $display("repl clean %0d dirty %0d, inv %0d, upgrade %0d, TR %0d, ST-TR %0d, ST-TR-WB %0d (dirty %0d)",
             n_repl_clean, n_repl_dirty, n_inv, n_upgrade, n_tr, n_st_tr, n_st_tr_wb, n_xfer_dirty);
    $display("uncached to memory %0d, to I/O %0d, atomics %0d, uncached owner write-backs %0d, ops %0d",
             n_uc_coh, n_uc_io, n_amo, n_uc_owner_wb, ops_done);
    $display("multi-beat uncached stores to memory %0d, to I/O %0d", n_uc_multi_coh, n_uc_multi_io);
    check(n_uc_multi_coh > 0 && n_uc_multi_io > 0, "no multi-beat uncached store");
    check(n_pb_stall > 0, "no pending-bit stall");
    check(n_squash > 0, "no squashed speculation");
    check(n_fwd_mod > 0, "no modified forward");
    check(n_fwd > 0, "no unmodified forward");
    check(n_spec_wait > 0, "no response held by the spec bit");
    check(n_fc_full > 0, "credits never exhausted");
    check(n_repl_clean > 0 && n_repl_dirty > 0, "replacement not exercised");
    check(n_inv > 0 && n_upgrade > 0, "invalidation/upgrade not exercised");
    check(n_tr > 0 && n_st_tr > 0 && n_st_tr_wb > 0 && n_xfer_dirty > 0, "transfers not exercised");
    check(n_uc_coh > 0 && n_uc_io > 0 && n_amo > 0 && n_uc_owner_wb > 0, "uncached not exercised");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (1_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired: ops %0d", ops_done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
