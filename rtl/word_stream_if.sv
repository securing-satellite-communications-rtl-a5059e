// word_stream_if: a valid/ready stream of 64-bit words with an end marker.
//
// Carries the pseudo-random sequence from the generator to the memory writer.
// A word moves when valid and ready are both high at a clock edge; last marks
// the final word of a sequence. The source must hold valid, data and last
// unchanged until the word is taken, which the assertion below checks.
interface word_stream_if #(
  parameter int unsigned W = 64
) (
  input logic clk,
  input logic rst_n
);

  logic         valid;
  logic         ready;
  logic         last;
  logic [W-1:0] data;

  modport source (output valid, output data, output last, input ready);
  modport sink   (input valid, input data, input last, output ready);

  a_hold : assert property (@(posedge clk) disable iff (!rst_n)
                            (valid && !ready) |=> (valid && $stable(data) && $stable(last)))
    else $error("word_stream_if: word changed or dropped before it was taken");

endinterface
