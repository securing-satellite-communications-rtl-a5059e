// branch_selector: picks the data path of one chaotic-map iteration.
//
// The iteration that produces y_k from y_{k-1} uses the rotate branch (Branch 2,
// the shifter) or the multiply branch (Branch 1, select accumulator followed by
// multiply accumulator), depending on the parity of k and on the map:
// map MAP_EQ2 rotates when k is odd, map MAP_EQ3 multiplies when k is odd.
// Only the selected branch receives y_{k-1}; the other one sees zero, so its
// logic does not toggle. That operand isolation is this design's choice; the
// branch rule itself is the one of the two map equations.
//
// Interface: purely combinational. k_odd is bit 0 of the index k of the value
// being computed; branch tells the merge multiplexer which result to keep.
module branch_selector
  import chaos_pkg::*;
#(
  parameter int unsigned W = 64
) (
  input  logic [W-1:0] y_prev,
  input  logic         k_odd,
  input  map_e         map_sel,
  output branch_e      branch,
  output logic [W-1:0] y_b1,
  output logic [W-1:0] y_b2
);

  always_comb begin
    if (k_odd ^ (map_sel == MAP_EQ3)) branch = BR_SHIFT;
    else                              branch = BR_MULT;
    y_b1 = (branch == BR_MULT)  ? y_prev : '0;
    y_b2 = (branch == BR_SHIFT) ? y_prev : '0;
  end

endmodule
