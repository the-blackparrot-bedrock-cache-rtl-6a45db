// bp_cce_fsm: FSM-based BedRock cache coherence engine (one engine slice).
//
// One engine manages the way groups whose set index has CCE_ID in its low
// log2(NUM_CORES) bits: 64 / NUM_CORES way groups of the 2*NUM_CORES coherent
// L1 caches (an I$ and a D$ per core). It is the serialisation point for every
// coherence transaction to those way groups.
//
// Inside: the request FSM (with MSHR, duplicate-tag directory and GAD), the
// memory response FSM, the pending bits, the speculative bits, the memory
// credit flow counter, two-entry bypass queues on the three inbound channels,
// and the command multiplexer that merges the commands of both FSMs (memory
// response FSM first; the request FSM waits while a block is being forwarded).
// The pending counters take the request FSM's increments and the decrements of
// both FSMs in the same cycle.
//
// Ports: the LCE request and response networks (in), the LCE command network
// (out), and the memory command (out) / memory response (in) networks, each a
// packed message beat with valid/ready. The Fill network runs between caches
// and does not touch the engine. ready_o is high while the request FSM waits
// in READY. The structure follows the paper's FSM engine block diagram; queue
// depth, arbitration priority and message formats are this design's own.
// The block diagram also draws the memory response FSM into the memory
// command multiplexer, but that FSM has no memory command to send, so the
// request FSM drives the memory command port alone. The flow counter's empty
// flag and count are left unconnected here; testbenches read them.
module bp_cce_fsm
  import bp_cce_pkg::*;
#(
  parameter int unsigned NUM_CORES        = 8,
  parameter int unsigned TAG_SETS_PER_ROW = 2,
  parameter int unsigned CCE_ID           = 0,
  parameter int unsigned MEM_CREDITS      = 8,
  localparam int unsigned NUM_CCE    = NUM_CORES,
  localparam int unsigned WG_PER_CCE = SETS / NUM_CCE,
  localparam int unsigned WG_W       = (WG_PER_CCE > 1) ? $clog2(WG_PER_CCE) : 1
) (
  input  logic          clk_i,
  input  logic          reset_i,

  input  lce_req_msg_t  lce_req_i,
  input  logic          lce_req_v_i,
  output logic          lce_req_ready_o,

  input  lce_resp_msg_t lce_resp_i,
  input  logic          lce_resp_v_i,
  output logic          lce_resp_ready_o,

  output lce_cmd_msg_t  lce_cmd_o,
  output logic          lce_cmd_v_o,
  input  logic          lce_cmd_ready_i,

  output mem_msg_t      mem_cmd_o,
  output logic          mem_cmd_v_o,
  input  logic          mem_cmd_ready_i,

  input  mem_msg_t      mem_resp_i,
  input  logic          mem_resp_v_i,
  output logic          mem_resp_ready_o,

  output logic          ready_o
);

  // ---------------------------------------------------------- input queues
  lce_req_msg_t  req_q;
  lce_resp_msg_t resp_q;
  mem_msg_t      mresp_q;
  logic          req_q_v, resp_q_v, mresp_q_v;
  logic          req_yumi, resp_yumi, mresp_yumi;

  bp_cce_bypass_fifo #(.WIDTH($bits(lce_req_msg_t))) req_fifo (
    .clk_i, .reset_i, .data_i(lce_req_i), .v_i(lce_req_v_i), .ready_o(lce_req_ready_o),
    .data_o(req_q), .v_o(req_q_v), .yumi_i(req_yumi)
  );
  bp_cce_bypass_fifo #(.WIDTH($bits(lce_resp_msg_t))) resp_fifo (
    .clk_i, .reset_i, .data_i(lce_resp_i), .v_i(lce_resp_v_i), .ready_o(lce_resp_ready_o),
    .data_o(resp_q), .v_o(resp_q_v), .yumi_i(resp_yumi)
  );
  bp_cce_bypass_fifo #(.WIDTH($bits(mem_msg_t))) mem_resp_fifo (
    .clk_i, .reset_i, .data_i(mem_resp_i), .v_i(mem_resp_v_i), .ready_o(mem_resp_ready_o),
    .data_o(mresp_q), .v_o(mresp_q_v), .yumi_i(mresp_yumi)
  );

  // --------------------------------------------------------- shared state
  logic            rq_pb_inc_v, rq_pb_dec_v, rq_pb_r_pending;
  logic [WG_W-1:0] rq_pb_inc_wg, rq_pb_dec_wg, rq_pb_r_wg;
  logic            mr_pb_w_v;
  logic [WG_W-1:0] mr_pb_w_wg;
  logic            sb_w_v;
  logic [WG_W-1:0] sb_w_wg, sb_r_wg;
  logic [1:0]      sb_w_op;
  coh_state_e      sb_w_state;
  spec_entry_t     sb_r_entry;
  logic            fc_inc, fc_dec, fc_full, fc_empty;
  logic [$clog2(MEM_CREDITS+1)-1:0] fc_count;

  bp_cce_pending_bits #(.NUM_WG(WG_PER_CCE)) pending_bits (
    .clk_i, .reset_i,
    .inc_v_i(rq_pb_inc_v), .inc_wg_i(rq_pb_inc_wg),
    .dec_v_i({rq_pb_dec_v, mr_pb_w_v}), .dec_wg_i({rq_pb_dec_wg, mr_pb_w_wg}),
    .clear_v_i(1'b0), .clear_wg_i('0),
    .r_wg_i(rq_pb_r_wg), .r_pending_o(rq_pb_r_pending)
  );

  bp_cce_spec_bits #(.NUM_WG(WG_PER_CCE)) spec_bits (
    .clk_i, .reset_i,
    .w_v_i(sb_w_v), .w_wg_i(sb_w_wg), .w_op_i(sb_w_op), .w_state_i(sb_w_state),
    .r_wg_i(sb_r_wg), .r_entry_o(sb_r_entry)
  );

  bp_cce_flow_counter #(.MAX_CREDITS(MEM_CREDITS)) flow_counter (
    .clk_i, .reset_i, .inc_i(fc_inc), .dec_i(fc_dec),
    .count_o(fc_count), .full_o(fc_full), .empty_o(fc_empty)
  );

  // ------------------------------------------------------------------ FSMs
  lce_cmd_msg_t rq_cmd, mr_cmd;
  logic         rq_cmd_v, mr_cmd_v;

  bp_cce_fsm_req #(
    .NUM_CORES(NUM_CORES), .TAG_SETS_PER_ROW(TAG_SETS_PER_ROW), .CCE_ID(CCE_ID)
  ) req_fsm (
    .clk_i, .reset_i,
    .req_i(req_q), .req_v_i(req_q_v), .req_yumi_o(req_yumi),
    .resp_i(resp_q), .resp_v_i(resp_q_v), .resp_yumi_o(resp_yumi),
    .cmd_o(rq_cmd), .cmd_v_o(rq_cmd_v), .cmd_ready_i(lce_cmd_ready_i && !mr_cmd_v),
    .mem_cmd_o, .mem_cmd_v_o, .mem_cmd_ready_i,
    .pb_inc_v_o(rq_pb_inc_v), .pb_inc_wg_o(rq_pb_inc_wg),
    .pb_dec_v_o(rq_pb_dec_v), .pb_dec_wg_o(rq_pb_dec_wg), .pb_r_wg_o(rq_pb_r_wg), .pb_r_pending_i(rq_pb_r_pending),
    .sb_w_v_o(sb_w_v), .sb_w_wg_o(sb_w_wg), .sb_w_op_o(sb_w_op), .sb_w_state_o(sb_w_state),
    .fc_inc_o(fc_inc), .fc_full_i(fc_full),
    .ready_o
  );

  bp_cce_fsm_mem_resp #(.NUM_CORES(NUM_CORES)) mem_resp_fsm (
    .clk_i, .reset_i,
    .mem_resp_i(mresp_q), .mem_resp_v_i(mresp_q_v), .mem_resp_yumi_o(mresp_yumi),
    .cmd_o(mr_cmd), .cmd_v_o(mr_cmd_v), .cmd_ready_i(lce_cmd_ready_i),
    .sb_r_wg_o(sb_r_wg), .sb_r_entry_i(sb_r_entry),
    .pb_w_v_o(mr_pb_w_v), .pb_w_wg_o(mr_pb_w_wg), .fc_dec_o(fc_dec)
  );

  // ------------------------------------------------------------ command mux
  assign lce_cmd_v_o = mr_cmd_v || rq_cmd_v;
  assign lce_cmd_o   = mr_cmd_v ? mr_cmd : rq_cmd;

  // The request FSM only raises a command when it may send it.
  assert property (@(posedge clk_i) disable iff (reset_i) rq_cmd_v |-> !mr_cmd_v)
    else $error("command network conflict");

endmodule
