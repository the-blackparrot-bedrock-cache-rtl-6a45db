// bp_cce_tag_checker: checks one directory row as it leaves the SRAM.
//
// A row holds TAG_SETS_PER_ROW tag sets, one per tracked cache, each with ASSOC
// {tag, state} entries. For every tag set the checker reports whether the
// requested tag is present in a valid (non-I) state, in which way, and in which
// coherence state. These per-row results are the slice of the three sharers
// vectors (hit, way, state) that belongs to the caches stored in this row.
// The paper names the unit and its outputs; the one-cycle combinational
// compare-and-encode structure is this design's choice. Purely combinational.
module bp_cce_tag_checker
  import bp_cce_pkg::*;
#(
  parameter int unsigned TAG_SETS_PER_ROW = 2
) (
  input  dir_entry_t [TAG_SETS_PER_ROW-1:0][ASSOC-1:0] row_i,
  input  logic       [TAG_W-1:0]                       tag_i,
  output logic       [TAG_SETS_PER_ROW-1:0]            hit_o,
  output logic       [TAG_SETS_PER_ROW-1:0][WAY_W-1:0] way_o,
  output coh_state_e [TAG_SETS_PER_ROW-1:0]            state_o
);

  always_comb begin
    for (int unsigned j = 0; j < TAG_SETS_PER_ROW; j++) begin
      hit_o[j]   = 1'b0;
      way_o[j]   = '0;
      state_o[j] = COH_I;
      for (int unsigned w = 0; w < ASSOC; w++) begin
        if (!hit_o[j] && row_i[j][w].state != COH_I && row_i[j][w].tag == tag_i) begin
          hit_o[j]   = 1'b1;
          way_o[j]   = WAY_W'(w);
          state_o[j] = row_i[j][w].state;
        end
      end
    end
  end

endmodule
