// multiply_accumulator: second stage of the multiply branch of the chaotic map.
//
// Computes y_out = (a * b + 1) mod 2^W from the two incremented halves given by
// the select accumulator. The full product of the two (W/2+1)-bit operands is
// W+2 bits wide; as in the 64-bit software version of the map, only its low W
// bits are kept, so the result wraps modulo 2^64.
//
// Interface: combinational (one multiplier and one adder, no register). The
// paper describes the multiply-and-add; the single-cycle form is this design's
// choice, and a synthesis tool maps it onto DSP slices.
module multiply_accumulator #(
  parameter int unsigned W = 64
) (
  input  logic [W/2:0] a,
  input  logic [W/2:0] b,
  output logic [W-1:0] y_out
);

  logic [W+1:0] prod;

  always_comb begin
    prod  = {{(W/2+1){1'b0}}, a} * {{(W/2+1){1'b0}}, b};
    y_out = prod[W-1:0] + W'(1);
  end

endmodule
