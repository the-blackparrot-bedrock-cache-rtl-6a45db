// tb_bp_cce_flow_counter: checks the memory-credit counter (8 credits).
//
// Random increments (command sent) and decrements (response consumed), never
// beyond the limits, are compared with a reference count every cycle; full
// and empty must track the count, the counter must reach both limits, and a
// simultaneous increment and decrement must leave it unchanged.
module tb_bp_cce_flow_counter;

  localparam int MAXC = 8;

  logic clk = 1'b0, reset = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic inc, dec, full, empty;
  logic [3:0] count;

  bp_cce_flow_counter #(.MAX_CREDITS(MAXC)) dut (
    .clk_i(clk), .reset_i(reset), .inc_i(inc), .dec_i(dec),
    .count_o(count), .full_o(full), .empty_o(empty)
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  int ref_cnt = 0, n_full = 0, n_empty = 0, n_both = 0;

  initial begin
    inc = 0; dec = 0;
    repeat (3) @(posedge clk);
    #1 reset = 0;
    for (int it = 0; it < 5000; it++) begin
      // bias towards filling in the first half and draining in the second
      automatic int bias = (it % 400 < 200) ? 3 : 1;
      inc = (ref_cnt < MAXC) && ($urandom_range(3) < bias);
      dec = (ref_cnt > 0) && ($urandom_range(3) >= bias);
      check(count == 4'(ref_cnt) && full == (ref_cnt == MAXC) && empty == (ref_cnt == 0),
            $sformatf("count %0d exp %0d", count, ref_cnt));
      n_full += int'(full); n_empty += int'(empty); n_both += int'(inc && dec);
      @(posedge clk); #1;
      ref_cnt += int'(inc) - int'(dec);
    end
    check(n_full > 0 && n_empty > 0 && n_both > 0, "coverage");
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
