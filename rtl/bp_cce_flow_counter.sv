// bp_cce_flow_counter: memory credit counter.
//
// Counts memory commands that have been sent but whose response has not yet
// been consumed. inc_i marks a command sent, dec_i a response consumed; both
// in one cycle leave the count unchanged. full_o (no credit left) stops the
// engine from issuing another memory command; empty_o means nothing is
// outstanding. The credit count MAX_CREDITS is this design's choice: the paper
// describes the counter's purpose but not its size. Resets to zero.
module bp_cce_flow_counter #(
  parameter int unsigned MAX_CREDITS = 8,
  localparam int unsigned CNT_W = $clog2(MAX_CREDITS + 1)
) (
  input  logic             clk_i,
  input  logic             reset_i,
  input  logic             inc_i,
  input  logic             dec_i,
  output logic [CNT_W-1:0] count_o,
  output logic             full_o,
  output logic             empty_o
);

  always_ff @(posedge clk_i) begin
    if (reset_i) count_o <= '0;
    else if (inc_i && !dec_i) count_o <= count_o + 1'b1;
    else if (dec_i && !inc_i) count_o <= count_o - 1'b1;
  end

  assign full_o  = (count_o == CNT_W'(MAX_CREDITS));
  assign empty_o = (count_o == '0);

  assert property (@(posedge clk_i) disable iff (reset_i) inc_i && !dec_i |-> !full_o)
    else $error("memory command sent without a credit");
  assert property (@(posedge clk_i) disable iff (reset_i) dec_i && !inc_i |-> !empty_o)
    else $error("memory response with no command outstanding");

endmodule
