// bp_cce_bypass_fifo: two-entry input queue with a bypass path.
//
// Queues an inbound network channel in front of the engine. When the queue is
// empty an arriving beat is visible on the output in the same cycle, so a
// message the engine is waiting for costs no extra cycle; otherwise beats
// leave in arrival order. ready_o depends only on the occupancy.
// valid/ready handshake on both sides.
module bp_cce_bypass_fifo #(
  parameter int unsigned WIDTH = 64
) (
  input  logic             clk_i,
  input  logic             reset_i,
  input  logic [WIDTH-1:0] data_i,
  input  logic             v_i,
  output logic             ready_o,
  output logic [WIDTH-1:0] data_o,
  output logic             v_o,
  input  logic             yumi_i    // consumer takes data_o this cycle
);

  logic [1:0][WIDTH-1:0] mem_r;
  logic                  rd_ptr_r, wr_ptr_r;
  logic [1:0]            count_r;
  logic                  enq, deq, empty;

  assign empty   = (count_r == 2'd0);
  assign ready_o = (count_r != 2'd2);
  assign v_o     = !empty || v_i;
  assign data_o  = empty ? data_i : mem_r[rd_ptr_r];
  assign deq     = yumi_i && v_o;
  // a bypassed beat consumed in the same cycle is never stored
  assign enq     = v_i && ready_o && !(empty && deq);

  always_ff @(posedge clk_i) begin
    if (reset_i) begin
      rd_ptr_r <= 1'b0;
      wr_ptr_r <= 1'b0;
      count_r  <= 2'd0;
    end else begin
      if (enq) begin
        mem_r[wr_ptr_r] <= data_i;
        wr_ptr_r        <= ~wr_ptr_r;
      end
      if (deq && !empty) rd_ptr_r <= ~rd_ptr_r;
      count_r <= count_r + {1'b0, enq} - {1'b0, deq && !empty};
    end
  end

  assert property (@(posedge clk_i) disable iff (reset_i) yumi_i |-> v_o)
    else $error("fifo dequeued while empty");

endmodule
