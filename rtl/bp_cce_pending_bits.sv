// bp_cce_pending_bits: one pending counter per way group.
//
// A way group has an open coherence transaction while its counter is non-zero.
// The engine increments the counter when it starts processing a request and
// when it issues a memory command (inc port), and decrements it when it
// consumes a memory response or a coherence acknowledgement (NUM_DEC decrement
// ports, one per consumer). clear_v_i zeroes a counter before that cycle's
// increment is added. All updates of one cycle are summed and take effect at
// the clock edge. The read is combinational and forwards the same cycle's
// decrements and clear, so a request waiting on a way group
// proceeds in the very cycle the last acknowledgement is consumed. The
// engine's own increment is not forwarded: the only reader is the one writer
// of that port. Counters reset to zero. The counter width and the separate
// decrement ports are this design's choices; the paper gives the counters and
// the forwarding behaviour.
module bp_cce_pending_bits #(
  parameter int unsigned NUM_WG  = 8,
  parameter int unsigned CNT_W   = 3,
  parameter int unsigned NUM_DEC = 2,
  localparam int unsigned WG_W   = (NUM_WG > 1) ? $clog2(NUM_WG) : 1
) (
  input  logic                         clk_i,
  input  logic                         reset_i,

  input  logic                         inc_v_i,
  input  logic [WG_W-1:0]              inc_wg_i,
  input  logic [NUM_DEC-1:0]           dec_v_i,
  input  logic [NUM_DEC-1:0][WG_W-1:0] dec_wg_i,
  input  logic                         clear_v_i,
  input  logic [WG_W-1:0]              clear_wg_i,

  input  logic [WG_W-1:0]              r_wg_i,
  output logic                         r_pending_o
);

  logic [NUM_WG-1:0][CNT_W-1:0] cnt_r, cnt_n, cnt_fwd;

  always_comb begin
    cnt_n   = cnt_r;
    cnt_fwd = cnt_r;
    for (int unsigned d = 0; d < NUM_DEC; d++)
      if (dec_v_i[d]) begin
        cnt_n[dec_wg_i[d]]   = cnt_n[dec_wg_i[d]] - 1'b1;
        cnt_fwd[dec_wg_i[d]] = cnt_fwd[dec_wg_i[d]] - 1'b1;
      end
    if (clear_v_i) begin
      cnt_n[clear_wg_i]   = '0;
      cnt_fwd[clear_wg_i] = '0;
    end
    if (inc_v_i) cnt_n[inc_wg_i] = cnt_n[inc_wg_i] + 1'b1;
  end

  always_ff @(posedge clk_i) begin
    if (reset_i) cnt_r <= '0;
    else         cnt_r <= cnt_n;
  end

  assign r_pending_o = (cnt_fwd[r_wg_i] != '0);

  // A counter must neither wrap up nor below zero.
  for (genvar g = 0; g < NUM_WG; g++) begin : g_chk
    assert property (@(posedge clk_i) disable iff (reset_i)
      !clear_v_i && (cnt_r[g] == '1) |-> (cnt_n[g] != '0))
      else $error("pending counter overflow");
    assert property (@(posedge clk_i) disable iff (reset_i)
      !clear_v_i && (cnt_r[g] == '0) |-> (cnt_n[g] != '1))
      else $error("pending counter underflow");
  end

endmodule
