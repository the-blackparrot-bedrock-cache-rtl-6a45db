// bp_cce_sram_1rw: single-ported synchronous SRAM with a per-bit write mask.
//
// One access per cycle: a write (w_i=1) stores data_i under mask_i at addr_i;
// a read returns mem[addr_i] on data_o in the following cycle. The directory
// segments use it as the tag-set storage (a hardened macro in an ASIC flow);
// the bit mask lets one {tag, state} entry be written in a single cycle
// without a read-modify-write. Contents are not reset: the engine clears every
// row after reset.
module bp_cce_sram_1rw #(
  parameter int unsigned WIDTH = 496,
  parameter int unsigned DEPTH = 32,
  localparam int unsigned ADDR_W = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic              clk_i,
  input  logic              v_i,
  input  logic              w_i,
  input  logic [ADDR_W-1:0] addr_i,
  input  logic [WIDTH-1:0]  data_i,
  input  logic [WIDTH-1:0]  mask_i,
  output logic [WIDTH-1:0]  data_o
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk_i) begin
    if (v_i && w_i) begin
      for (int unsigned b = 0; b < WIDTH; b++)
        if (mask_i[b]) mem[addr_i][b] <= data_i[b];
    end
    if (v_i && !w_i) data_o <= mem[addr_i];
  end

endmodule
