// bp_cce_gad: Generate Auxiliary Directory information.
//
// Consumes the sharers vectors of a way-group read, the requester's LRU entry
// and the request type, and in one combinational cycle produces what the
// request FSM needs to follow the BedRock MOESIF directory table:
//   * the requester's own hit, way and state;
//   * cached_{S,E,M,O,F}: the block is held in that state by another cache;
//   * the owner (a cache in E, M, O or F other than the requester);
//   * replacement: the requester misses and its LRU victim is E, M or O
//     (the table's Replacement column, answered with ST^I-WB);
//   * upgrade: a write from S, O or F, answered with STW^M;
//   * transfer: a cached request whose block is sourced by the owner;
//   * inv_vec: caches that must receive an Inv (other S copies on a write,
//     plus the O/F owner when an S copy upgrades; for an uncached request every
//     S or F copy, including the requester's);
//   * uc_owner: for an uncached request, the E/M/O copy that must be
//     invalidated with a write-back;
//   * req_next_state and owner_next_state.
// The unit's inputs, outputs and single-cycle latency follow the paper; the
// boolean equations are derived here from the protocol tables.
module bp_cce_gad
  import bp_cce_pkg::*;
#(
  parameter int unsigned NUM_LCE = 16
) (
  input  logic       [NUM_LCE-1:0]            sh_hit_i,
  input  logic       [NUM_LCE-1:0][WAY_W-1:0] sh_way_i,
  input  coh_state_e [NUM_LCE-1:0]            sh_state_i,
  input  logic       [LCE_ID_W-1:0]           req_lce_i,
  input  logic                                write_i,
  input  logic                                non_excl_i,
  input  logic                                uncached_i,
  input  coh_state_e                          lru_state_i,

  output logic                                req_hit_o,
  output logic       [WAY_W-1:0]              req_way_o,
  output coh_state_e                          req_state_o,
  output logic                                cached_s_o,
  output logic                                cached_e_o,
  output logic                                cached_m_o,
  output logic                                cached_o_o,
  output logic                                cached_f_o,
  output logic                                owner_v_o,
  output logic       [LCE_ID_W-1:0]           owner_lce_o,
  output logic       [WAY_W-1:0]              owner_way_o,
  output coh_state_e                          owner_state_o,
  output logic                                replacement_o,
  output logic                                upgrade_o,
  output logic                                transfer_o,
  output logic       [NUM_LCE-1:0]            inv_vec_o,
  output logic                                uc_owner_v_o,
  output logic       [LCE_ID_W-1:0]           uc_owner_lce_o,
  output logic       [WAY_W-1:0]              uc_owner_way_o,
  output coh_state_e                          req_next_state_o,
  output coh_state_e                          owner_next_state_o
);

  always_comb begin
    req_hit_o      = sh_hit_i[req_lce_i];
    req_way_o      = sh_way_i[req_lce_i];
    req_state_o    = sh_hit_i[req_lce_i] ? sh_state_i[req_lce_i] : COH_I;

    cached_s_o = 1'b0; cached_e_o = 1'b0; cached_m_o = 1'b0;
    cached_o_o = 1'b0; cached_f_o = 1'b0;
    owner_v_o = 1'b0; owner_lce_o = '0; owner_way_o = '0; owner_state_o = COH_I;
    uc_owner_v_o = 1'b0; uc_owner_lce_o = '0; uc_owner_way_o = '0;

    for (int unsigned i = 0; i < NUM_LCE; i++) begin
      if (sh_hit_i[i] && LCE_ID_W'(i) != req_lce_i) begin
        cached_s_o |= (sh_state_i[i] == COH_S);
        cached_e_o |= (sh_state_i[i] == COH_E);
        cached_m_o |= (sh_state_i[i] == COH_M);
        cached_o_o |= (sh_state_i[i] == COH_O);
        cached_f_o |= (sh_state_i[i] == COH_F);
        if (is_owner_state(sh_state_i[i])) begin
          owner_v_o     = 1'b1;
          owner_lce_o   = LCE_ID_W'(i);
          owner_way_o   = sh_way_i[i];
          owner_state_o = sh_state_i[i];
        end
      end
      if (sh_hit_i[i] && (sh_state_i[i] == COH_E || sh_state_i[i] == COH_M
                          || sh_state_i[i] == COH_O)) begin
        uc_owner_v_o   = 1'b1;
        uc_owner_lce_o = LCE_ID_W'(i);
        uc_owner_way_o = sh_way_i[i];
      end
    end

    replacement_o = !uncached_i && !req_hit_o
                    && (lru_state_i == COH_E || lru_state_i == COH_M || lru_state_i == COH_O);
    upgrade_o     = !uncached_i && write_i && req_hit_o
                    && (req_state_o == COH_S || req_state_o == COH_O || req_state_o == COH_F);
    transfer_o    = !uncached_i && !upgrade_o && owner_v_o;

    inv_vec_o = '0;
    for (int unsigned i = 0; i < NUM_LCE; i++) begin
      if (uncached_i) begin
        inv_vec_o[i] = sh_hit_i[i] && (sh_state_i[i] == COH_S || sh_state_i[i] == COH_F);
      end else if (write_i) begin
        inv_vec_o[i] = sh_hit_i[i] && (LCE_ID_W'(i) != req_lce_i)
                       && ((sh_state_i[i] == COH_S)
                           || (upgrade_o && req_state_o == COH_S
                               && (sh_state_i[i] == COH_O || sh_state_i[i] == COH_F)));
      end
    end

    if (write_i)                                  req_next_state_o = COH_M;
    else if (owner_v_o || cached_s_o || non_excl_i) req_next_state_o = COH_S;
    else                                          req_next_state_o = COH_E;

    if (write_i) owner_next_state_o = COH_I;
    else begin
      unique case (owner_state_o)
        COH_E:   owner_next_state_o = COH_F;
        COH_M:   owner_next_state_o = COH_O;
        COH_O:   owner_next_state_o = COH_O;
        COH_F:   owner_next_state_o = COH_F;
        default: owner_next_state_o = COH_I;
      endcase
    end
  end

endmodule
