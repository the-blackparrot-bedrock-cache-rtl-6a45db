// tb_bp_cce_dir_segment: checks one duplicate-tag directory segment (8 caches,
// two tag sets per row, 8 way groups) against a reference array.
//
// After clearing every row, the test applies random entry writes (tag and
// state), state-only writes, entry reads and way-group reads. Every entry read
// must return the reference entry in its second cycle; every way-group read
// must raise rdw_done exactly 1 + 8/2 = 5 cycles after being accepted
// (the paper's 1 + C/2 cycles) and then present, for every cache, whether the
// tag hits, in which way and in which state, plus the requester's LRU entry.
module tb_bp_cce_dir_segment;
  import bp_cce_pkg::*;

  localparam int NC = 8, TSPR = 2, NWG = 8;

  logic clk = 1'b0, reset = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic v, busy, rdw_done, rde_v;
  dir_op_e op;
  logic [2:0] wg, cache, way, lru_way;
  logic [TAG_W-1:0] tag;
  coh_state_e st;
  logic [NC-1:0] sh_hit;
  logic [NC-1:0][WAY_W-1:0] sh_way;
  coh_state_e [NC-1:0] sh_state;
  dir_entry_t lru_entry, rde_entry;

  bp_cce_dir_segment #(.NUM_CACHES(NC), .TAG_SETS_PER_ROW(TSPR), .WG_PER_CCE(NWG)) dut (
    .clk_i(clk), .reset_i(reset), .v_i(v), .op_i(op), .wg_i(wg), .cache_i(cache), .way_i(way),
    .lru_way_i(lru_way), .tag_i(tag), .state_i(st), .busy_o(busy), .rdw_done_o(rdw_done),
    .sh_hit_o(sh_hit), .sh_way_o(sh_way), .sh_state_o(sh_state), .lru_entry_o(lru_entry),
    .rde_v_o(rde_v), .rde_entry_o(rde_entry)
  );

  dir_entry_t refd [NWG][NC][ASSOC];
  logic [TAG_W-1:0] tags [4];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  task automatic issue(dir_op_e o, int g, int c, int w, int lw, logic [TAG_W-1:0] t, coh_state_e s);
    v = 1'b1; op = o; wg = 3'(g); cache = 3'(c); way = 3'(w); lru_way = 3'(lw);
    tag = t; st = s;
    @(posedge clk); #1;
    v = 1'b0;
  endtask

  initial begin
    v = 0; op = DIR_NOP; wg = 0; cache = 0; way = 0; lru_way = 0; tag = '0; st = COH_I;
    for (int i = 0; i < 4; i++) tags[i] = TAG_W'({$urandom, $urandom});
    repeat (3) @(posedge clk);
    reset = 0;
    @(posedge clk); #1;
    // clear all rows
    for (int g = 0; g < NWG; g++)
      for (int c = 0; c < NC; c += TSPR) issue(DIR_CLR, g, c, 0, 0, '0, COH_I);
    for (int g = 0; g < NWG; g++) for (int c = 0; c < NC; c++) for (int w = 0; w < ASSOC; w++)
      refd[g][c][w] = '{tag: '0, state: COH_I};

    for (int it = 0; it < 3000; it++) begin
      automatic int k = int'($urandom_range(9));
      automatic int g = int'($urandom_range(NWG - 1));
      automatic int c = int'($urandom_range(NC - 1));
      automatic int w = int'($urandom_range(ASSOC - 1));
      automatic logic [TAG_W-1:0] t = tags[$urandom_range(3)];
      automatic coh_state_e s = coh_state_e'($urandom_range(5));
      if (k < 5) begin
        issue(DIR_WDE, g, c, w, 0, t, s);
        refd[g][c][w] = '{tag: t, state: s};
        check(!busy, "write must take one cycle");
      end else if (k < 6) begin
        issue(DIR_WDS, g, c, w, 0, t, s);
        refd[g][c][w].state = s;
      end else if (k < 8) begin
        issue(DIR_RDE, g, c, w, 0, '0, COH_I);
        check(rde_v && busy, "entry read result in second cycle");
        check(rde_entry == refd[g][c][w], $sformatf("entry read g%0d c%0d w%0d", g, c, w));
        @(posedge clk); #1;
        check(!busy, "entry read takes two cycles");
      end else begin
        automatic int lat = 0;
        automatic int lw = int'($urandom_range(ASSOC - 1));
        issue(DIR_RDW, g, c, 0, lw, t, COH_I);
        lat = 1;
        while (!rdw_done) begin @(posedge clk); #1; lat++; end
        lat++;   // the cycle rdw_done is high
        @(posedge clk); #1;
        check(lat == 1 + NC / TSPR, $sformatf("way-group read took %0d cycles", lat));
        check(!busy, "segment idle after way-group read");
        for (int cc = 0; cc < NC; cc++) begin
          automatic int hw = -1;
          for (int ww = ASSOC - 1; ww >= 0; ww--)
            if (refd[g][cc][ww].state != COH_I && refd[g][cc][ww].tag == t) hw = ww;
          check(sh_hit[cc] == (hw >= 0), $sformatf("sharer hit g%0d cache %0d", g, cc));
          if (hw >= 0) begin
            check(sh_way[cc] == 3'(hw), "sharer way");
            check(sh_state[cc] == refd[g][cc][hw].state, "sharer state");
          end
        end
        check(lru_entry == refd[g][c][lw], "LRU entry");
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
