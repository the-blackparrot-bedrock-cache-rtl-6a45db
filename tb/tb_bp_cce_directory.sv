// tb_bp_cce_directory: checks the two-segment duplicate-tag directory of one
// engine (8 cores, 16 caches: LCE 2k = I$ of core k, LCE 2k+1 = D$) against a
// reference array indexed by LCE id, way group and way.
//
// After clearing the directory it applies random entry writes, state writes,
// entry reads and way-group reads addressed by physical address and LCE id.
// Entry reads must return address and state in their second cycle; way-group
// reads must finish in 1 + C/2 = 5 cycles and report every LCE's hit, way and
// state plus the requester's LRU address and state.
module tb_bp_cce_directory;
  import bp_cce_pkg::*;

  localparam int NCORE = 8, NL = 16, NWG = 8;

  logic clk = 1'b0, reset = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic v, busy, rdw_done, rde_v;
  dir_op_e op;
  logic [PADDR_W-1:0] addr, lru_addr, rde_addr;
  logic [LCE_ID_W-1:0] lce;
  logic [WAY_W-1:0] way, lru_way;
  coh_state_e st, lru_state, rde_state;
  logic [NL-1:0] sh_hit;
  logic [NL-1:0][WAY_W-1:0] sh_way;
  coh_state_e [NL-1:0] sh_state;

  bp_cce_directory #(.NUM_CORES(NCORE), .TAG_SETS_PER_ROW(2)) dut (
    .clk_i(clk), .reset_i(reset), .v_i(v), .op_i(op), .addr_i(addr), .lce_i(lce), .way_i(way),
    .lru_way_i(lru_way), .state_i(st), .busy_o(busy), .rdw_done_o(rdw_done),
    .sh_hit_o(sh_hit), .sh_way_o(sh_way), .sh_state_o(sh_state),
    .lru_addr_o(lru_addr), .lru_state_o(lru_state),
    .rde_v_o(rde_v), .rde_addr_o(rde_addr), .rde_state_o(rde_state)
  );

  logic [TAG_W-1:0] rtag [NWG][NL][ASSOC];
  coh_state_e       rst  [NWG][NL][ASSOC];
  logic [TAG_W-1:0] tags [3];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic logic [PADDR_W-1:0] mk_addr(logic [TAG_W-1:0] t, int g);
    return {t, 3'(g), 3'b000, 6'(0)};
  endfunction

  task automatic issue(dir_op_e o, logic [PADDR_W-1:0] a, int l, int w, int lw, coh_state_e s);
    v = 1'b1; op = o; addr = a; lce = LCE_ID_W'(l); way = WAY_W'(w); lru_way = WAY_W'(lw); st = s;
    @(posedge clk); #1;
    v = 1'b0;
  endtask

  initial begin
    v = 0; op = DIR_NOP; addr = '0; lce = '0; way = '0; lru_way = '0; st = COH_I;
    for (int i = 0; i < 3; i++) tags[i] = TAG_W'({$urandom, $urandom});
    repeat (3) @(posedge clk);
    reset = 0;
    @(posedge clk); #1;
    for (int g = 0; g < NWG; g++)
      for (int l = 0; l < NL; l += 4) issue(DIR_CLR, mk_addr('0, g), l, 0, 0, COH_I);
    for (int g = 0; g < NWG; g++) for (int l = 0; l < NL; l++) for (int w = 0; w < ASSOC; w++) begin
      rtag[g][l][w] = '0; rst[g][l][w] = COH_I;
    end

    for (int it = 0; it < 3000; it++) begin
      automatic int k = int'($urandom_range(9));
      automatic int g = int'($urandom_range(NWG - 1));
      automatic int l = int'($urandom_range(NL - 1));
      automatic int w = int'($urandom_range(ASSOC - 1));
      automatic logic [TAG_W-1:0] t = tags[$urandom_range(2)];
      automatic coh_state_e s = coh_state_e'($urandom_range(5));
      if (k < 5) begin
        issue(DIR_WDE, mk_addr(t, g), l, w, 0, s);
        rtag[g][l][w] = t; rst[g][l][w] = s;
      end else if (k < 6) begin
        issue(DIR_WDS, mk_addr(t, g), l, w, 0, s);
        rst[g][l][w] = s;
      end else if (k < 8) begin
        issue(DIR_RDE, mk_addr(t, g), l, w, 0, COH_I);
        check(rde_v, "entry read valid in second cycle");
        check(rde_addr == mk_addr(rtag[g][l][w], g) && rde_state == rst[g][l][w],
              $sformatf("entry read g%0d lce %0d way %0d", g, l, w));
        @(posedge clk); #1;
      end else begin
        automatic int lat = 1;
        automatic int lw = int'($urandom_range(ASSOC - 1));
        issue(DIR_RDW, mk_addr(t, g), l, 0, lw, COH_I);
        while (!rdw_done) begin @(posedge clk); #1; lat++; end
        lat++;
        @(posedge clk); #1;
        check(lat == 1 + NCORE / 2, $sformatf("way-group read took %0d cycles", lat));
        check(!busy, "idle after way-group read");
        for (int ll = 0; ll < NL; ll++) begin
          automatic int hw = -1;
          for (int ww = ASSOC - 1; ww >= 0; ww--)
            if (rst[g][ll][ww] != COH_I && rtag[g][ll][ww] == t) hw = ww;
          check(sh_hit[ll] == (hw >= 0), $sformatf("sharer hit g%0d lce %0d", g, ll));
          if (hw >= 0) check(sh_way[ll] == WAY_W'(hw) && sh_state[ll] == rst[g][ll][hw],
                             "sharer way/state");
        end
        check(lru_addr == mk_addr(rtag[g][l][lw], g) && lru_state == rst[g][l][lw], "LRU entry");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

endmodule
