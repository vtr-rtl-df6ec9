// lib: local input buffer of one head compute unit.
//
// Holds the left (input feature) matrix of the HCU. It has P_T banks, one per
// row of PEs, so all PE rows read their own A row-block in the same cycle.
// Word = P_PE elements: bank t, address m_tile*K + k holds column k of A
// row-block (m_tile*P_T + t), i.e. A[(m_tile*P_T+t)*P_PE + i][k], i = 0..P_PE-1.
// This is the block-contiguous row-major layout of the left matrix, stored in
// the order the systolic arrays consume it.
//
// Ports: one write port that writes the same address in every bank (the
// stream from the global input buffer carries one word for every bank), one
// read port with a common address. Read latency is one cycle (registered
// output, block RAM style). No reset on the storage.
//
// The buffer and its per-HCU placement follow the publication; the banking,
// address map and depth are this design's choices.
module lib
  import vtr_pkg::*;
#(
  parameter int unsigned P_T   = P_T_DEF,
  parameter int unsigned P_PE  = P_PE_DEF,
  parameter int unsigned DEPTH = BUF_DEPTH,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic clk,
  input  logic we,
  input  logic [AW-1:0] waddr,
  input  elem_t [P_T-1:0][P_PE-1:0] wdata,
  input  logic re,
  input  logic [AW-1:0] raddr,
  output elem_t [P_T-1:0][P_PE-1:0] rdata
);

  for (genvar t = 0; t < P_T; t++) begin : g_bank
    elem_t [P_PE-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we) mem[waddr] <= wdata[t];
      if (re) rdata[t]   <= mem[raddr];
    end
  end

endmodule
