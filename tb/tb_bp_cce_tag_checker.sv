// tb_bp_cce_tag_checker: checks the directory tag checker on random rows of
// two tag sets of 8 ways each.
//
// Rows are filled with a few recurring tags and random states so that hits,
// invalid matching entries and several matching ways all occur. For each tag
// set the expected result is the lowest valid (non-I) way whose tag equals the
// looked-up tag: hit, way and state. The checker is combinational; results are
// sampled one time step after the inputs change.
module tb_bp_cce_tag_checker;
  import bp_cce_pkg::*;

  localparam int TSPR = 2;
  int checks = 0, failures = 0;

  dir_entry_t [TSPR-1:0][ASSOC-1:0] row;
  logic [TAG_W-1:0] tag;
  logic [TSPR-1:0] hit;
  logic [TSPR-1:0][WAY_W-1:0] way;
  coh_state_e [TSPR-1:0] state;

  bp_cce_tag_checker #(.TAG_SETS_PER_ROW(TSPR)) dut (
    .row_i(row), .tag_i(tag), .hit_o(hit), .way_o(way), .state_o(state)
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  logic [TAG_W-1:0] tags [3];
  int n_hit = 0, n_miss = 0;

  initial begin
    for (int i = 0; i < 3; i++) tags[i] = TAG_W'({$urandom, $urandom});
    for (int it = 0; it < 20000; it++) begin
      for (int j = 0; j < TSPR; j++)
        for (int w = 0; w < ASSOC; w++) begin
          row[j][w].tag   = tags[$urandom_range(2)];
          row[j][w].state = ($urandom_range(2) == 0) ? COH_I : coh_state_e'($urandom_range(5));
        end
      tag = tags[$urandom_range(2)];
      #1;
      for (int j = 0; j < TSPR; j++) begin
        automatic int hw = -1;
        for (int w = ASSOC - 1; w >= 0; w--)
          if (row[j][w].state != COH_I && row[j][w].tag == tag) hw = w;
        check(hit[j] == (hw >= 0), $sformatf("hit of tag set %0d", j));
        if (hw >= 0) begin
          check(way[j] == WAY_W'(hw) && state[j] == row[j][hw].state, "way/state");
          n_hit++;
        end else n_miss++;
      end
    end
    check(n_hit > 0 && n_miss > 0, "coverage of hits and misses");
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
