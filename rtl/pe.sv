// pe: processing element, a P_PE x P_PE output-stationary systolic array.
//
// Computes one P_PE x P_PE output block C = A_blk * B_blk of a dense
// block-wise matrix multiplication. Each cycle the caller presents column k
// of the A row-block (`a_vec[i]` = A[i][k]) and row k of the B column-block
// (`b_vec[j]` = B[k][j]) with `v` high; `first` marks k = 0 and `last` marks
// k = K-1. Inside, row i of A is delayed i cycles and column j of B j cycles
// (input skew) so that A[i][k] and B[k][j] meet in cell (i,j).
//
// Interface timing: vectors are consumed at the clock edge where `v` is high.
// `acc[i][j]` becomes final progressively; `done` pulses for one cycle when
// the cell (P_PE-1, P_PE-1) has added its last product, which is
// K + 2*P_PE - 2 clock edges after the first vector is presented (counting
// the edge that takes it), and at that point the whole
// block is final. `acc` then stays put until the next `first` reaches each
// cell, so a new stream may start in the cycle after `done`.
//
// The array organisation follows the publication's PE drawing (a grid of
// compute elements, operands entering from left and top); the skew registers
// and the done flag are this design's own.
module pe
  import vtr_pkg::*;
#(
  parameter int unsigned P_PE = P_PE_DEF
) (
  input  logic  clk,
  input  logic  rst_n,
  input  elem_t [P_PE-1:0] a_vec,
  input  elem_t [P_PE-1:0] b_vec,
  input  logic  v,
  input  logic  first,
  input  logic  last,
  output acc_t  [P_PE-1:0][P_PE-1:0] acc,
  output logic  done
);

  // Skewed operands at the array edge.
  elem_t [P_PE-1:0] a_sk, b_sk;
  logic  [P_PE-1:0] v_sk, f_sk, l_sk;

  for (genvar i = 0; i < P_PE; i++) begin : g_skew
    if (i == 0) begin : g_nodelay
      always_comb begin
        a_sk[0] = a_vec[0];
        b_sk[0] = b_vec[0];
        v_sk[0] = v;
        f_sk[0] = first;
        l_sk[0] = last;
      end
    end else begin : g_delay
      elem_t [i-1:0] a_sr, b_sr;
      logic  [i-1:0] v_sr, f_sr, l_sr;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          a_sr <= '0; b_sr <= '0; v_sr <= '0; f_sr <= '0; l_sr <= '0;
        end else begin
          a_sr[0] <= a_vec[i];
          b_sr[0] <= b_vec[i];
          v_sr[0] <= v;
          f_sr[0] <= first;
          l_sr[0] <= last;
          for (int s = 1; s < i; s++) begin
            a_sr[s] <= a_sr[s-1];
            b_sr[s] <= b_sr[s-1];
            v_sr[s] <= v_sr[s-1];
            f_sr[s] <= f_sr[s-1];
            l_sr[s] <= l_sr[s-1];
          end
        end
      end
      always_comb begin
        a_sk[i] = a_sr[i-1];
        b_sk[i] = b_sr[i-1];
        v_sk[i] = v_sr[i-1];
        f_sk[i] = f_sr[i-1];
        l_sk[i] = l_sr[i-1];
      end
    end
  end

  // Inter-cell wires: horizontal (a, flags) index [i][j] = input of cell (i,j).
  elem_t [P_PE-1:0][P_PE:0] a_h;
  logic  [P_PE-1:0][P_PE:0] v_h, f_h, l_h;
  elem_t [P_PE:0][P_PE-1:0] b_v;

  for (genvar i = 0; i < P_PE; i++) begin : g_edge
    always_comb begin
      a_h[i][0] = a_sk[i];
      v_h[i][0] = v_sk[i];
      f_h[i][0] = f_sk[i];
      l_h[i][0] = l_sk[i];
      b_v[0][i] = b_sk[i];
    end
  end

  for (genvar i = 0; i < P_PE; i++) begin : g_row
    for (genvar j = 0; j < P_PE; j++) begin : g_col
      ce u_ce (
        .clk, .rst_n,
        .a_in    (a_h[i][j]),
        .b_in    (b_v[i][j]),
        .v_in    (v_h[i][j]),
        .first_in(f_h[i][j]),
        .last_in (l_h[i][j]),
        .a_out   (a_h[i][j+1]),
        .b_out   (b_v[i+1][j]),
        .v_out   (v_h[i][j+1]),
        .first_out(f_h[i][j+1]),
        .last_out(l_h[i][j+1]),
        .acc     (acc[i][j])
      );
    end
  end

  always_comb done = v_h[P_PE-1][P_PE] & l_h[P_PE-1][P_PE];

endmodule
