// chaos_map: one iteration of the 64-bit one-dimensional chaotic map per step.
//
// The state register holds y_{k-1} and its index. On each step the branch
// selector sends y_{k-1} either through the select accumulator and the multiply
// accumulator (y_k = (y[63:32]+1)*(y[31:0]+1)+1 mod 2^64) or through the shifter
// (y_k = rotl(y, y[5:0])), the merge multiplexer keeps the result of the chosen
// branch, and y_k is written back as the next y_{k-1}. The status register
// raises it_done for one cycle after every completed iteration.
//
// Which branch runs follows the parity of the new index k: with MAP_EQ2 odd k
// rotates and even k multiplies; with MAP_EQ3 it is the other way round. The
// block structure (branch selector, select accumulator, multiply accumulator,
// shifter, feedback and status register) is the paper's. One iteration per
// clock, the load port with an explicit starting index, and the reset values
// are this design's choices.
//
// Interface and timing:
//   load  (priority) : y <= y_init, k <= k_init on the next edge.
//   step             : y <= f_{k+1}(y), k <= k+1 on the next edge, it_done is
//                      high during the following cycle, while y shows y_k.
//   map_sel must be held constant while a sequence is being iterated.
module chaos_map
  import chaos_pkg::*;
#(
  parameter int unsigned W   = 64,
  parameter int unsigned K_W = 32
) (
  input  logic           clk,
  input  logic           rst_n,
  input  map_e           map_sel,
  input  logic           load,
  input  logic [W-1:0]   y_init,
  input  logic [K_W-1:0] k_init,
  input  logic           step,
  output logic [W-1:0]   y,
  output logic [K_W-1:0] k,
  output logic           it_done
);

  logic [K_W-1:0] k_next;
  branch_e        branch;
  logic [W-1:0]   y_b1, y_b2;
  logic [W/2:0]   hi_p1, lo_p1;
  logic [W-1:0]   y_mult, y_shift, y_next;

  assign k_next = k + K_W'(1);

  branch_selector #(.W(W)) u_branch_selector (
    .y_prev (y),
    .k_odd  (k_next[0]),
    .map_sel(map_sel),
    .branch (branch),
    .y_b1   (y_b1),
    .y_b2   (y_b2)
  );

  select_accumulator #(.W(W)) u_select_accumulator (
    .y_in (y_b1),
    .hi_p1(hi_p1),
    .lo_p1(lo_p1)
  );

  multiply_accumulator #(.W(W)) u_multiply_accumulator (
    .a    (hi_p1),
    .b    (lo_p1),
    .y_out(y_mult)
  );

  shifter #(.W(W)) u_shifter (
    .y_in (y_b2),
    .y_out(y_shift)
  );

  assign y_next = (branch == BR_MULT) ? y_mult : y_shift;

  // feedback (state) register and status register
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y       <= '0;
      k       <= '0;
      it_done <= 1'b0;
    end else if (load) begin
      y       <= y_init;
      k       <= k_init;
      it_done <= 1'b0;
    end else begin
      it_done <= step;
      if (step) begin
        y <= y_next;
        k <= k_next;
      end
    end
  end

endmodule
