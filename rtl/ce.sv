// ce: one compute element of a processing element's systolic array.
//
// Multiply-accumulate cell of an output-stationary array. The left-matrix
// operand enters from the left neighbour and leaves to the right, the
// right-matrix operand enters from above and leaves downward, each through one
// register. Three flags travel with the left operand: `v_in` (this pair is
// valid), `first_in` (first term of the dot product: the accumulator restarts)
// and `last_in` (last term). Because the flags travel with the data, a new
// dot product can follow the previous one without a clear cycle.
//
// Timing: `acc` and all forwarded outputs are registered; `acc` holds the sum
// of the valid products seen so far, updated at the edge that consumes them.
// Reset is asynchronous and active low.
//
// The cell grid and the left/top operand flow follow the publication's PE
// drawing; the flags, widths and reset are this design's choices.
module ce
  import vtr_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  elem_t a_in,
  input  elem_t b_in,
  input  logic  v_in,
  input  logic  first_in,
  input  logic  last_in,
  output elem_t a_out,
  output elem_t b_out,
  output logic  v_out,
  output logic  first_out,
  output logic  last_out,
  output acc_t  acc
);

  logic signed [2*DW-1:0] prod;
  always_comb prod = a_in * b_in;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_out     <= '0;
      b_out     <= '0;
      v_out     <= 1'b0;
      first_out <= 1'b0;
      last_out  <= 1'b0;
      acc       <= '0;
    end else begin
      a_out     <= a_in;
      b_out     <= b_in;
      v_out     <= v_in;
      first_out <= first_in & v_in;
      last_out  <= last_in & v_in;
      if (v_in) acc <= (first_in ? acc_t'(0) : acc) + acc_t'(prod);
    end
  end

endmodule
