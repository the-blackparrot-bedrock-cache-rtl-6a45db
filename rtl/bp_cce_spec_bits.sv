// bp_cce_spec_bits: speculative-read bookkeeping, one entry per way group.
//
// Each entry is {spec, squash, fwd_mod, state}. Operations (one per cycle):
//   SPEC_SET     a speculative memory read was issued: spec=1, others cleared
//   SPEC_SQUASH  the block comes from a cache: spec=0, squash=1
//   SPEC_FWD_MOD memory supplies the block in another state: spec=0,
//                fwd_mod=1, state=state_i
//   SPEC_FWD     memory supplies the block as requested: all bits clear
// The memory response path reads an entry combinationally (r_entry_o): while
// spec is set it must hold the response; afterwards it squashes it, forwards
// it with the stored state, or forwards it unchanged. Entries reset to zero.
// The fields follow the paper; the operation encoding is this design's own.
module bp_cce_spec_bits
  import bp_cce_pkg::*;
#(
  parameter int unsigned NUM_WG = 8,
  localparam int unsigned WG_W  = (NUM_WG > 1) ? $clog2(NUM_WG) : 1
) (
  input  logic            clk_i,
  input  logic            reset_i,

  input  logic            w_v_i,
  input  logic [WG_W-1:0] w_wg_i,
  input  logic [1:0]      w_op_i,   // 0 SET, 1 SQUASH, 2 FWD_MOD, 3 FWD
  input  coh_state_e      w_state_i,

  input  logic [WG_W-1:0] r_wg_i,
  output spec_entry_t     r_entry_o
);

  localparam logic [1:0] SPEC_SET = 2'd0, SPEC_SQUASH = 2'd1, SPEC_FWD_MOD = 2'd2, SPEC_FWD = 2'd3;

  spec_entry_t [NUM_WG-1:0] spec_r;

  always_ff @(posedge clk_i) begin
    if (reset_i) spec_r <= '0;
    else if (w_v_i) begin
      unique case (w_op_i)
        SPEC_SET:     spec_r[w_wg_i] <= '{spec: 1'b1, squash: 1'b0, fwd_mod: 1'b0, state: COH_I};
        SPEC_SQUASH:  spec_r[w_wg_i] <= '{spec: 1'b0, squash: 1'b1, fwd_mod: 1'b0, state: COH_I};
        SPEC_FWD_MOD: spec_r[w_wg_i] <= '{spec: 1'b0, squash: 1'b0, fwd_mod: 1'b1, state: w_state_i};
        default:      spec_r[w_wg_i] <= '{spec: 1'b0, squash: 1'b0, fwd_mod: 1'b0, state: COH_I};
      endcase
    end
  end

  assign r_entry_o = spec_r[r_wg_i];

endmodule
