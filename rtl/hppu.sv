// hppu: highly parallel processing unit.
//
// Dense block-wise matrix multiplication engine with three levels of
// parallelism: P_H head compute units work on P_H heads at once; inside each,
// P_T x P_C processing elements work on different token row-blocks (t) and
// column blocks (c); each PE is a P_PE x P_PE systolic array. In one tile the
// unit produces P_H*P_T*P_C output blocks of P_PE x P_PE elements.
//
// Data path: the host writes the input feature matrix into the global input
// buffer (GIB) and the weights into the weight buffer (WB). A LIB_LOAD command
// copies GIB words into the local input buffers of the selected HCUs
// (broadcast for a linear layer, one HCU at a time for per-head operands such
// as Q_i). A DBMM command runs the tiles; each HCU's local output buffer
// streams its blocks into its bank of the global output buffer (GOB), which
// the host reads.
//
// Layouts (A = left matrix, row-major blocks; B = right matrix, column-major
// blocks; block = P_PE x P_PE):
//   GIB/LIB bank t, word m_tile*K + k = A[(m_tile*P_T+t)*P_PE + i][k]
//   WB head h bank c, word n_tile*K + k = B_h[k][(n_tile*P_C+c)*P_PE + j]
//   GOB head h, block tile*P_T*P_C + t*P_C + c, tile = m_tile*n_tiles + n_tile
//
// Interface: `start` with `cmd` while `busy` is low; `done` pulses at the end.
// Host writes may happen at any time the unit is idle. GOB reads have one
// cycle latency.
//
// The unit's structure (GIB, WB with per-HCU local buffers, HCUs of PEs with
// LIB and LOB, GOB, controller) follows the publication; command set, layouts
// inside a block, and buffer depths are this design's choices.
module hppu
  import vtr_pkg::*;
#(
  parameter int unsigned P_H   = P_H_DEF,
  parameter int unsigned P_T   = P_T_DEF,
  parameter int unsigned P_C   = P_C_DEF,
  parameter int unsigned P_PE  = P_PE_DEF,
  parameter int unsigned DEPTH = BUF_DEPTH,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned HW   = (P_H > 1) ? $clog2(P_H) : 1,
  localparam int unsigned TW   = (P_T > 1) ? $clog2(P_T) : 1,
  localparam int unsigned CW   = (P_C > 1) ? $clog2(P_C) : 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  cmd_t cmd,
  output logic busy,
  output logic done,
  output logic stall,
  // host write of the GIB
  input  logic gib_we,
  input  logic [TW-1:0] gib_bank,
  input  logic [AW-1:0] gib_addr,
  input  elem_t [P_PE-1:0] gib_wdata,
  // host write of the WB
  input  logic wb_we,
  input  logic [HW-1:0] wb_head,
  input  logic [CW-1:0] wb_bank,
  input  logic [AW-1:0] wb_addr,
  input  elem_t [P_PE-1:0] wb_wdata,
  // host read of the GOB
  input  logic gob_re,
  input  logic [HW-1:0] gob_head,
  input  logic [AW-1:0] gob_addr,
  output elem_t [P_PE-1:0][P_PE-1:0] gob_rdata
);

  logic gib_re;
  logic [AW-1:0] gib_raddr, lib_waddr, lib_raddr, wb_raddr, gob_base;
  logic [P_H-1:0] lib_we;
  logic rd_en, first, last, capture;
  elem_t [P_T-1:0][P_PE-1:0] gib_rdata;
  elem_t [P_H-1:0][P_C-1:0][P_PE-1:0] wb_rdata;
  logic [P_H-1:0] pe_done, lob_busy, o_valid;
  logic [P_H-1:0][AW-1:0] o_addr;
  elem_t [P_H-1:0][P_PE-1:0][P_PE-1:0] o_block;

  hppu_ctrl #(.P_H(P_H), .P_T(P_T), .P_C(P_C), .AW(AW)) u_ctrl (
    .clk, .rst_n, .start, .cmd, .busy, .done,
    .gib_re, .gib_raddr, .lib_we, .lib_waddr,
    .rd_en, .lib_raddr, .wb_raddr, .first, .last,
    .pe_done(pe_done[0]), .lob_busy(|lob_busy),
    .capture, .gob_base, .stall
  );

  gib #(.P_T(P_T), .P_PE(P_PE), .DEPTH(DEPTH)) u_gib (
    .clk, .we(gib_we), .wbank(gib_bank), .waddr(gib_addr), .wdata(gib_wdata),
    .re(gib_re), .raddr(gib_raddr), .rdata(gib_rdata)
  );

  weight_buffer #(.P_H(P_H), .P_C(P_C), .P_PE(P_PE), .DEPTH(DEPTH)) u_wb (
    .clk, .we(wb_we), .whead(wb_head), .wbank(wb_bank), .waddr(wb_addr), .wdata(wb_wdata),
    .re(rd_en), .raddr(wb_raddr), .rdata(wb_rdata)
  );

  for (genvar h = 0; h < P_H; h++) begin : g_hcu
    hcu #(.P_T(P_T), .P_C(P_C), .P_PE(P_PE), .DEPTH(DEPTH)) u_hcu (
      .clk, .rst_n,
      .lib_we(lib_we[h]), .lib_waddr, .lib_wdata(gib_rdata),
      .rd_en, .lib_raddr, .first, .last, .b_vec(wb_rdata[h]),
      .pe_done(pe_done[h]),
      .capture, .gob_base,
      .out_valid(o_valid[h]), .out_addr(o_addr[h]), .out_block(o_block[h]),
      .lob_busy(lob_busy[h])
    );
  end

  gob #(.P_H(P_H), .P_PE(P_PE), .DEPTH(DEPTH)) u_gob (
    .clk, .we(o_valid), .waddr(o_addr), .wdata(o_block),
    .re(gob_re), .rhead(gob_head), .raddr(gob_addr), .rdata(gob_rdata)
  );

endmodule
