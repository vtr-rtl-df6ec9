// weight_buffer: right-matrix (weight) store of the HPPU.
//
// Split into one local buffer per head compute unit, and each local buffer
// into one bank per PE column (P_C banks), so every PE column of every HCU
// gets its own B column-block each cycle. Word = P_PE elements: head h, bank
// c, address n_tile*K + k holds row k of B column-block (n_tile*P_C + c) of
// head h, i.e. B_h[k][(n_tile*P_C+c)*P_PE + j], j = 0..P_PE-1. This is the
// block-contiguous column-major layout of the right matrix.
//
// Ports: host write of one word; one read address common to all heads and
// banks (the HCUs run in lockstep), registered, one cycle latency.
//
// The per-HCU local buffers and per-column banks follow the publication; the
// address map and depth are this design's choices.
module weight_buffer
  import vtr_pkg::*;
#(
  parameter int unsigned P_H   = P_H_DEF,
  parameter int unsigned P_C   = P_C_DEF,
  parameter int unsigned P_PE  = P_PE_DEF,
  parameter int unsigned DEPTH = BUF_DEPTH,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned HW   = (P_H > 1) ? $clog2(P_H) : 1,
  localparam int unsigned CW   = (P_C > 1) ? $clog2(P_C) : 1
) (
  input  logic clk,
  input  logic we,
  input  logic [HW-1:0] whead,
  input  logic [CW-1:0] wbank,
  input  logic [AW-1:0] waddr,
  input  elem_t [P_PE-1:0] wdata,
  input  logic re,
  input  logic [AW-1:0] raddr,
  output elem_t [P_H-1:0][P_C-1:0][P_PE-1:0] rdata
);

  for (genvar h = 0; h < P_H; h++) begin : g_head
    for (genvar c = 0; c < P_C; c++) begin : g_bank
      elem_t [P_PE-1:0] mem [DEPTH];
      always_ff @(posedge clk) begin
        if (we && whead == HW'(h) && wbank == CW'(c)) mem[waddr] <= wdata;
        if (re) rdata[h][c] <= mem[raddr];
      end
    end
  end

endmodule
