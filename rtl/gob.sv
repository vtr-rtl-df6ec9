// gob: global output buffer of the HPPU.
//
// Collects the output blocks streamed out of the local output buffers: one
// bank per head compute unit, each with its own write port so all HCUs stream
// at once. Word = one P_PE x P_PE block of Q8.8 elements. Head h, address
// tile*P_T*P_C + t*P_C + c holds the block computed by PE (t,c) of HCU h in
// that tile, i.e. output block (m_tile*P_T+t, n_tile*P_C+c) of head h with
// tile = m_tile*n_tiles + n_tile.
//
// Ports: P_H write ports; one host read port (head, address), registered, one
// cycle latency.
//
// The buffer follows the publication; layout and depth are this design's.
module gob
  import vtr_pkg::*;
#(
  parameter int unsigned P_H   = P_H_DEF,
  parameter int unsigned P_PE  = P_PE_DEF,
  parameter int unsigned DEPTH = BUF_DEPTH,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned HW   = (P_H > 1) ? $clog2(P_H) : 1
) (
  input  logic clk,
  input  logic [P_H-1:0] we,
  input  logic [P_H-1:0][AW-1:0] waddr,
  input  elem_t [P_H-1:0][P_PE-1:0][P_PE-1:0] wdata,
  input  logic re,
  input  logic [HW-1:0] rhead,
  input  logic [AW-1:0] raddr,
  output elem_t [P_PE-1:0][P_PE-1:0] rdata
);

  elem_t [P_H-1:0][P_PE-1:0][P_PE-1:0] bank_q;
  logic  [HW-1:0] rhead_q;

  for (genvar h = 0; h < P_H; h++) begin : g_bank
    elem_t [P_PE-1:0][P_PE-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we[h]) mem[waddr[h]] <= wdata[h];
      if (re)    bank_q[h]     <= mem[raddr];
    end
  end

  always_ff @(posedge clk) if (re) rhead_q <= rhead;

  always_comb rdata = bank_q[rhead_q];

endmodule
