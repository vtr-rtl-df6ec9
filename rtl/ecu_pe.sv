// ecu_pe: element-wise processing element of the element-wise compute unit.
//
// For one P_PE x P_PE block it computes, per element,
//   y[i][j] = f( sat(a[i][j]*b[i][j] >> FRAC) + c[i][j] )     (saturated)
// with f chosen by `func` (see ecu_func). When `mask_en` is high (the block
// lies on the diagonal of an attention matrix and masking is requested), the
// elements with i == j are forced to the most negative value (-128.0) after
// the multiply-add and before f, which is the Locality Self-Attention
// diagonal mask: after exp they become 0.
//
// Timing: one register stage; `y` and `v_out` follow `v_in` by one cycle.
//
// The operation f(A (.) B (+) C) and the masking step follow the
// publication; fixed-point widths, saturation and the register stage are this
// design's choices.
module ecu_pe
  import vtr_pkg::*;
#(
  parameter int unsigned P_PE = P_PE_DEF
) (
  input  logic clk,
  input  logic rst_n,
  input  logic v_in,
  input  func_e func,
  input  logic mask_en,
  input  elem_t [P_PE-1:0][P_PE-1:0] a,
  input  elem_t [P_PE-1:0][P_PE-1:0] b,
  input  elem_t [P_PE-1:0][P_PE-1:0] c,
  output logic v_out,
  output elem_t [P_PE-1:0][P_PE-1:0] y
);

  elem_t [P_PE-1:0][P_PE-1:0] x, fx;

  for (genvar i = 0; i < P_PE; i++) begin : g_i
    for (genvar j = 0; j < P_PE; j++) begin : g_j
      logic signed [2*DW-1:0] prod;
      always_comb begin
        prod = a[i][j] * b[i][j];
        if (mask_en && i == j) x[i][j] = ELEM_MIN;
        else x[i][j] = sat_elem((ACC_W+2)'(prod >>> FRAC) + (ACC_W+2)'(c[i][j]));
      end
      ecu_func u_f (.func, .x(x[i][j]), .y(fx[i][j]));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v_out <= 1'b0;
    else        v_out <= v_in;
  end

  always_ff @(posedge clk) if (v_in) y <= fx;

endmodule
