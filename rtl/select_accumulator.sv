// select_accumulator: first stage of the multiply branch of the chaotic map.
//
// Splits the 64-bit operand into its upper and lower halves and adds one to
// each: hi_p1 = y[63:32] + 1 and lo_p1 = y[31:0] + 1. The halves replace the
// division by 2^32 and the remainder modulo 2^32 of the map equation by plain
// bit selection. Both sums are one bit wider than a half so that
// 0xFFFFFFFF + 1 = 2^32 is kept exactly, as the 64-bit software arithmetic does.
//
// Interface: combinational, no clock. The bit split follows the paper; the
// result width and the absence of a pipeline register are this design's choice.
module select_accumulator #(
  parameter int unsigned W = 64
) (
  input  logic [W-1:0] y_in,
  output logic [W/2:0] hi_p1,
  output logic [W/2:0] lo_p1
);

  always_comb begin
    hi_p1 = {1'b0, y_in[W-1:W/2]} + (W/2+1)'(1);
    lo_p1 = {1'b0, y_in[W/2-1:0]} + (W/2+1)'(1);
  end

endmodule
