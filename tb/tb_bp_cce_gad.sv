// tb_bp_cce_gad: checks the Generate Auxiliary Directory information unit on
// random but legal directory snapshots of 16 caches.
//
// Each snapshot is either "no owner, some S copies" or "one owner in E or M
// and nothing else" or "one owner in O or F plus S copies". A random requester
// (which may itself hold the block) issues a read, read-non-exclusive, write
// or uncached request with a random LRU victim state. The expected outputs are
// derived here directly from the directory protocol table: the requester's
// next state (M for writes; S if the block is cached elsewhere or the read is
// non-exclusive; else E), the owner's next state (I on a write, E->F, M->O,
// O and F unchanged), upgrade (write from S/O/F), transfer (cached request
// with another owner and no upgrade), replacement (miss with an E/M/O
// victim), the set of caches to invalidate, and the uncached owner. The unit
// is combinational, so results are checked in the same cycle.
module tb_bp_cce_gad;
  import bp_cce_pkg::*;

  localparam int NL = 16;

  int checks = 0, failures = 0;

  logic [NL-1:0] sh_hit;
  logic [NL-1:0][WAY_W-1:0] sh_way;
  coh_state_e [NL-1:0] sh_state;
  logic [LCE_ID_W-1:0] req_lce;
  logic write, non_excl, uncached;
  coh_state_e lru_state;
  logic req_hit, cs, ce, cm, co, cf, owner_v, repl, upg, xfer, uc_owner_v;
  logic [WAY_W-1:0] req_way, owner_way, uc_owner_way;
  coh_state_e req_state, owner_state, req_next, owner_next;
  logic [LCE_ID_W-1:0] owner_lce, uc_owner_lce;
  logic [NL-1:0] inv_vec;

  bp_cce_gad #(.NUM_LCE(NL)) dut (
    .sh_hit_i(sh_hit), .sh_way_i(sh_way), .sh_state_i(sh_state), .req_lce_i(req_lce),
    .write_i(write), .non_excl_i(non_excl), .uncached_i(uncached), .lru_state_i(lru_state),
    .req_hit_o(req_hit), .req_way_o(req_way), .req_state_o(req_state),
    .cached_s_o(cs), .cached_e_o(ce), .cached_m_o(cm), .cached_o_o(co), .cached_f_o(cf),
    .owner_v_o(owner_v), .owner_lce_o(owner_lce), .owner_way_o(owner_way),
    .owner_state_o(owner_state), .replacement_o(repl), .upgrade_o(upg), .transfer_o(xfer),
    .inv_vec_o(inv_vec), .uc_owner_v_o(uc_owner_v), .uc_owner_lce_o(uc_owner_lce),
    .uc_owner_way_o(uc_owner_way), .req_next_state_o(req_next), .owner_next_state_o(owner_next)
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  int n_upg = 0, n_xfer = 0, n_repl = 0, n_inv = 0, n_uc_own = 0;

  initial begin
    for (int it = 0; it < 20000; it++) begin
      automatic int kind = int'($urandom_range(2));
      automatic int own = -1;
      automatic int r = int'($urandom_range(NL - 1));
      automatic int rk = int'($urandom_range(3));   // 0 rd, 1 rd-ne, 2 wr, 3 uncached
      automatic bit any_other_s = 0, exp_upg, exp_xfer, exp_repl, exp_uc_v;
      automatic coh_state_e rs, exp_rn, exp_on;
      automatic logic [NL-1:0] exp_inv = '0;
      sh_hit = '0;
      for (int l = 0; l < NL; l++) begin
        sh_way[l] = WAY_W'($urandom_range(ASSOC - 1));
        sh_state[l] = coh_state_e'($urandom_range(5));   // ignored when not hit
      end
      if (kind != 1) for (int l = 0; l < NL; l++) if ($urandom_range(3) == 0) begin
        sh_hit[l] = 1; sh_state[l] = COH_S;
      end
      if (kind != 0) begin
        own = int'($urandom_range(NL - 1));
        sh_hit[own] = 1;
        sh_state[own] = (kind == 1) ? ($urandom_range(1) ? COH_E : COH_M)
                                    : ($urandom_range(1) ? COH_O : COH_F);
      end
      req_lce = LCE_ID_W'(r);
      write = (rk == 2) || (rk == 3 && $urandom_range(1));
      non_excl = (rk == 1);
      uncached = (rk == 3);
      lru_state = coh_state_e'($urandom_range(5));
      #1;
      rs = sh_hit[r] ? sh_state[r] : COH_I;
      for (int l = 0; l < NL; l++) if (l != r && sh_hit[l] && sh_state[l] == COH_S) any_other_s = 1;
      exp_upg  = !uncached && write && (rs inside {COH_S, COH_O, COH_F});
      exp_xfer = !uncached && !exp_upg && own >= 0 && own != r;
      exp_repl = !uncached && !sh_hit[r] && (lru_state inside {COH_E, COH_M, COH_O});
      exp_rn   = write ? COH_M : ((own >= 0 && own != r) || any_other_s || non_excl) ? COH_S : COH_E;
      exp_on   = write ? COH_I : (own < 0 || own == r) ? COH_I
               : (sh_state[own] == COH_E) ? COH_F : (sh_state[own] == COH_M) ? COH_O : sh_state[own];
      exp_uc_v = own >= 0 && (sh_state[own] inside {COH_E, COH_M, COH_O});
      for (int l = 0; l < NL; l++) begin
        if (uncached) exp_inv[l] = sh_hit[l] && (sh_state[l] inside {COH_S, COH_F});
        else if (write && l != r && sh_hit[l])
          exp_inv[l] = (sh_state[l] == COH_S) || (rs == COH_S && l == own);
      end
      check(req_hit == sh_hit[r] && req_state == rs && (!sh_hit[r] || req_way == sh_way[r]),
            "requester hit/way/state");
      check(owner_v == (own >= 0 && own != r), "owner valid");
      if (own >= 0 && own != r)
        check(owner_lce == LCE_ID_W'(own) && owner_way == sh_way[own] && owner_state == sh_state[own],
              "owner identity");
      check(cs == any_other_s, "cached shared flag");
      check(ce == (own >= 0 && own != r && sh_state[own] == COH_E) &&
            cm == (own >= 0 && own != r && sh_state[own] == COH_M) &&
            co == (own >= 0 && own != r && sh_state[own] == COH_O) &&
            cf == (own >= 0 && own != r && sh_state[own] == COH_F), "cached E/M/O/F flags");
      check(upg == exp_upg, "upgrade");
      check(xfer == exp_xfer, "transfer");
      check(repl == exp_repl, "replacement");
      check(req_next == exp_rn, $sformatf("requester next state %0d exp %0d", req_next, exp_rn));
      if (own >= 0 && own != r) check(owner_next == exp_on, "owner next state");
      check(inv_vec == exp_inv, $sformatf("invalidate set %h exp %h", inv_vec, exp_inv));
      check(uc_owner_v == exp_uc_v, "uncached owner valid");
      if (exp_uc_v) check(uc_owner_lce == LCE_ID_W'(own) && uc_owner_way == sh_way[own],
                          "uncached owner identity");
      n_upg += int'(exp_upg); n_xfer += int'(exp_xfer); n_repl += int'(exp_repl);
      n_inv += int'(exp_inv != '0); n_uc_own += int'(exp_uc_v && uncached);
    end
    check(n_upg > 0 && n_xfer > 0 && n_repl > 0 && n_inv > 0 && n_uc_own > 0, "coverage");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

endmodule
