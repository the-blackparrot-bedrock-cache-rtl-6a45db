// tb_bp_cce_lru_extract: checks the LRU extraction unit for 8 caches and two
// tag sets per row.
//
// For random rows, row indices, requesting caches and LRU ways, the entry must
// be valid exactly when the row holds the requester's tag set (row index =
// cache / 2) and must then equal the entry at horizontal slot cache % 2 and
// the given way. Combinational; sampled one time step after the inputs change.
module tb_bp_cce_lru_extract;
  import bp_cce_pkg::*;

  localparam int TSPR = 2, NC = 8;
  int checks = 0, failures = 0;

  dir_entry_t [TSPR-1:0][ASSOC-1:0] row;
  logic [2:0] row_blk, cache;
  logic [WAY_W-1:0] lru_way;
  logic v;
  dir_entry_t entry;

  bp_cce_lru_extract #(.TAG_SETS_PER_ROW(TSPR), .NUM_CACHES(NC)) dut (
    .row_i(row), .row_blk_i(row_blk), .cache_i(cache), .lru_way_i(lru_way),
    .v_o(v), .entry_o(entry)
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  int n_v = 0;

  initial begin
    for (int it = 0; it < 20000; it++) begin
      for (int j = 0; j < TSPR; j++)
        for (int w = 0; w < ASSOC; w++) row[j][w] = '{tag: TAG_W'($urandom), state: coh_state_e'($urandom_range(5))};
      row_blk = 3'($urandom_range(NC / TSPR - 1));
      cache   = 3'($urandom_range(NC - 1));
      lru_way = WAY_W'($urandom_range(ASSOC - 1));
      #1;
      check(v == (int'(cache) / TSPR == int'(row_blk)), "valid when the row holds the cache");
      if (v) begin
        check(entry == row[int'(cache) % TSPR][lru_way], "extracted entry");
        n_v++;
      end
    end
    check(n_v > 0, "coverage");
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
