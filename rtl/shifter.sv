// shifter: the rotate branch of the chaotic map.
//
// Takes the shift amount s from the low six bits of the operand and forms
// (y << s) | (y >> (64 - s)), a left rotation of y by s positions. For s = 0
// the right shift is by the full width and yields zero, so the result is y
// itself, the same value any software form of the formula gives.
//
// Interface: combinational barrel rotator, no clock. The operation follows the
// paper; the s = 0 handling is spelled out here because the paper leaves it open.
module shifter #(
  parameter int unsigned W = 64
) (
  input  logic [W-1:0] y_in,
  output logic [W-1:0] y_out
);

  localparam int unsigned SW = $clog2(W);

  logic [SW-1:0] s;
  logic [SW:0]   rs;

  always_comb begin
    s     = y_in[SW-1:0];
    rs    = (SW+1)'(W) - {1'b0, s};
    y_out = (y_in << s) | (y_in >> rs);
  end

endmodule
