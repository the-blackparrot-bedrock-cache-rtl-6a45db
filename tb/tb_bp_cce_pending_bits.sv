// tb_bp_cce_pending_bits: checks the per-way-group pending counters.
//
// Every cycle a random mix of one increment, two decrements (never below
// zero) and an occasional clear is applied to random way groups and mirrored
// in a reference. The combinational read of a random way group must report
// "pending" when the reference count, after this cycle's decrements and
// clear (but not its increment), is non-zero. This forwarding lets a waiting
// request proceed in the same cycle the last acknowledgement arrives.
module tb_bp_cce_pending_bits;

  localparam int NWG = 8, MAXCNT = 7;

  logic clk = 1'b0, reset = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic inc_v, clear_v, r_pending;
  logic [2:0] inc_wg, clear_wg, r_wg;
  logic [1:0] dec_v;
  logic [1:0][2:0] dec_wg;

  bp_cce_pending_bits #(.NUM_WG(NWG), .CNT_W(3), .NUM_DEC(2)) dut (
    .clk_i(clk), .reset_i(reset), .inc_v_i(inc_v), .inc_wg_i(inc_wg),
    .dec_v_i(dec_v), .dec_wg_i(dec_wg), .clear_v_i(clear_v), .clear_wg_i(clear_wg),
    .r_wg_i(r_wg), .r_pending_o(r_pending)
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  int refc [NWG];
  int n_fwd = 0, n_pend = 0;

  initial begin
    inc_v = 0; dec_v = 0; dec_wg = '0; clear_v = 0; clear_wg = 0; inc_wg = 0; r_wg = 0;
    for (int g = 0; g < NWG; g++) refc[g] = 0;
    repeat (3) @(posedge clk);
    #1 reset = 0;
    for (int it = 0; it < 10000; it++) begin
      automatic int tmp [NWG];
      automatic int fwd;
      tmp = refc;
      inc_wg = 3'($urandom_range(NWG - 1));
      for (int d = 0; d < 2; d++) begin
        dec_wg[d] = 3'($urandom_range(NWG - 1));
        dec_v[d]  = (tmp[dec_wg[d]] > 0) && $urandom_range(1);
        if (dec_v[d]) tmp[dec_wg[d]]--;
      end
      clear_v  = ($urandom_range(31) == 0);
      clear_wg = 3'($urandom_range(NWG - 1));
      if (clear_v) tmp[clear_wg] = 0;
      inc_v = (tmp[inc_wg] < MAXCNT) && ($urandom_range(2) != 0);
      r_wg  = 3'($urandom_range(NWG - 1));
      #1;
      fwd = tmp[r_wg];
      check(r_pending == (fwd != 0), $sformatf("pending of way group %0d (count %0d)", r_wg, fwd));
      n_pend += int'(fwd != 0);
      n_fwd  += int'(fwd == 0 && refc[r_wg] != 0);
      if (inc_v) tmp[inc_wg]++;
      @(posedge clk); #1;
      refc = tmp;
    end
    check(n_fwd > 0 && n_pend > 0, "coverage of forwarded decrements");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end

endmodule
