// bp_cce_fsm_mem_resp: memory response state machine of the FSM coherence engine.
//
// Runs beside the request FSM and examines every memory response as it arrives:
//   * block read data (MEM_RD) is forwarded to the LCE named in the response
//     payload as a DATA command, one beat per cycle; a speculative response
//     waits while its way group's spec bit is still set, is dropped if the
//     squash bit is set (the block came from another cache), or is forwarded
//     with the state recorded by fwd_mod;
//   * uncached load and atomic results become a one-beat UC_DATA command
//     (atomics with no return value are dropped);
//   * header-only responses to write commands are sunk.
// When the last beat of a response is consumed the memory credit is returned
// and, for cacheable addresses, the way group's pending counter is decremented.
// Three states: READY (examine / first beat), FWD (remaining beats forwarded),
// SINK (remaining beats dropped). This FSM has priority for the command
// network. Behaviour follows the paper; the
// message formats are this design's own.
module bp_cce_fsm_mem_resp
  import bp_cce_pkg::*;
#(
  parameter int unsigned NUM_CORES = 8,
  localparam int unsigned NUM_CCE    = NUM_CORES,
  localparam int unsigned CCE_W      = (NUM_CCE > 1) ? $clog2(NUM_CCE) : 0,
  localparam int unsigned WG_PER_CCE = SETS / NUM_CCE,
  localparam int unsigned WG_W       = (WG_PER_CCE > 1) ? $clog2(WG_PER_CCE) : 1
) (
  input  logic            clk_i,
  input  logic            reset_i,

  input  mem_msg_t        mem_resp_i,
  input  logic            mem_resp_v_i,
  output logic            mem_resp_yumi_o,

  output lce_cmd_msg_t    cmd_o,
  output logic            cmd_v_o,
  input  logic            cmd_ready_i,

  output logic [WG_W-1:0] sb_r_wg_o,
  input  spec_entry_t     sb_r_entry_i,

  output logic            pb_w_v_o,     // decrement request
  output logic [WG_W-1:0] pb_w_wg_o,
  output logic            fc_dec_o
);

  typedef enum logic [1:0] {S_READY, S_FWD, S_SINK} state_e;
  state_e state_r, state_n;

  lce_cmd_hdr_t fwd_hdr_r;   // header of the block being forwarded

  logic [WG_W-1:0] wg;
  logic            cacheable, squash, fwd, done;
  lce_cmd_hdr_t    new_hdr;

  assign wg        = WG_W'(mem_resp_i.hdr.addr[OFFSET_W +: SET_W] >> CCE_W);
  assign cacheable = mem_resp_i.hdr.addr >= CACHEABLE_BASE;
  assign sb_r_wg_o = wg;

  always_comb begin
    new_hdr          = '0;
    new_hdr.addr     = mem_resp_i.hdr.addr;
    new_hdr.dst_lce  = mem_resp_i.hdr.payload.lce_id;
    new_hdr.way      = mem_resp_i.hdr.payload.way;
    new_hdr.state    = (mem_resp_i.hdr.spec && sb_r_entry_i.fwd_mod) ? sb_r_entry_i.state
                                                                    : mem_resp_i.hdr.payload.state;
    new_hdr.msg_type = (mem_resp_i.hdr.msg_type == MEM_RD) ? CMD_DATA : CMD_UC_DATA;
  end

  always_comb begin
    state_n         = state_r;
    mem_resp_yumi_o = 1'b0;
    cmd_v_o         = 1'b0;
    cmd_o           = '0;
    squash          = 1'b0;
    fwd             = 1'b0;
    unique case (state_r)
      S_READY: if (mem_resp_v_i && !(mem_resp_i.hdr.spec && sb_r_entry_i.spec)) begin
        unique case (mem_resp_i.hdr.msg_type)
          MEM_RD:            begin squash = mem_resp_i.hdr.spec && sb_r_entry_i.squash; fwd = !squash; end
          MEM_UC_RD:         fwd = 1'b1;
          MEM_AMO:           fwd = !mem_resp_i.hdr.amo_no_return;
          default:           fwd = 1'b0;   // write acknowledgements are sunk
        endcase
        if (fwd) begin
          cmd_o   = '{hdr: new_hdr, data: mem_resp_i.data, last: mem_resp_i.last};
          cmd_v_o = 1'b1;
          if (cmd_ready_i) begin
            mem_resp_yumi_o = 1'b1;
            if (!mem_resp_i.last) state_n = S_FWD;
          end
        end else begin
          mem_resp_yumi_o = 1'b1;
          if (!mem_resp_i.last) state_n = S_SINK;
        end
      end
      S_FWD: if (mem_resp_v_i) begin
        cmd_o   = '{hdr: fwd_hdr_r, data: mem_resp_i.data, last: mem_resp_i.last};
        cmd_v_o = 1'b1;
        if (cmd_ready_i) begin
          mem_resp_yumi_o = 1'b1;
          if (mem_resp_i.last) state_n = S_READY;
        end
      end
      S_SINK: if (mem_resp_v_i) begin
        mem_resp_yumi_o = 1'b1;
        if (mem_resp_i.last) state_n = S_READY;
      end
      default: state_n = S_READY;
    endcase
  end

  assign done      = mem_resp_yumi_o && mem_resp_i.last;
  assign fc_dec_o  = done;
  assign pb_w_v_o  = done && cacheable;
  assign pb_w_wg_o = wg;

  always_ff @(posedge clk_i) begin
    if (reset_i) begin
      state_r   <= S_READY;
      fwd_hdr_r <= '0;
    end else begin
      state_r <= state_n;
      if (state_r == S_READY && mem_resp_yumi_o) fwd_hdr_r <= new_hdr;
    end
  end

endmodule
