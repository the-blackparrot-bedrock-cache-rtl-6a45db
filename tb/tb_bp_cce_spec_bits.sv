// tb_bp_cce_spec_bits: checks the per-way-group speculative-access bits.
//
// Random writes (set speculative, squash, forward-with-modified-state,
// forward) to random way groups are mirrored in a reference table; a random
// way group is read back every cycle. A write is visible from the cycle after
// it is made.
module tb_bp_cce_spec_bits;
  import bp_cce_pkg::*;

  localparam int NWG = 8;

  logic clk = 1'b0, reset = 1'b1;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic w_v;
  logic [2:0] w_wg, r_wg;
  logic [1:0] w_op;
  coh_state_e w_state;
  spec_entry_t r_entry;

  bp_cce_spec_bits #(.NUM_WG(NWG)) dut (
    .clk_i(clk), .reset_i(reset), .w_v_i(w_v), .w_wg_i(w_wg), .w_op_i(w_op),
    .w_state_i(w_state), .r_wg_i(r_wg), .r_entry_o(r_entry)
  );

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  spec_entry_t refs [NWG];
  int n_op [4] = '{0, 0, 0, 0};

  initial begin
    w_v = 0; w_wg = 0; w_op = 0; w_state = COH_I; r_wg = 0;
    for (int g = 0; g < NWG; g++) refs[g] = '0;
    repeat (3) @(posedge clk);
    #1 reset = 0;
    for (int it = 0; it < 5000; it++) begin
      w_v = $urandom_range(1);
      w_wg = 3'($urandom_range(NWG - 1));
      w_op = 2'($urandom_range(3));
      w_state = coh_state_e'($urandom_range(5));
      r_wg = 3'($urandom_range(NWG - 1));
      #1;
      check(r_entry == refs[r_wg], $sformatf("read of way group %0d", r_wg));
      @(posedge clk); #1;
      if (w_v) begin
        n_op[w_op]++;
        unique case (w_op)
          2'd0: refs[w_wg] = '{spec: 1'b1, squash: 1'b0, fwd_mod: 1'b0, state: COH_I};
          2'd1: refs[w_wg] = '{spec: 1'b0, squash: 1'b1, fwd_mod: 1'b0, state: COH_I};
          2'd2: refs[w_wg] = '{spec: 1'b0, squash: 1'b0, fwd_mod: 1'b1, state: w_state};
          default: refs[w_wg] = '{spec: 1'b0, squash: 1'b0, fwd_mod: 1'b0, state: COH_I};
        endcase
      end
    end
    check(n_op[0] > 0 && n_op[1] > 0 && n_op[2] > 0 && n_op[3] > 0, "coverage");
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
