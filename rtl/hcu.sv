// hcu: head compute unit, one attention head (or one column slice of a
// linear layer) of the HPPU.
//
// Contains the HCU's local input buffer, a P_T x P_C grid of processing
// elements and the local output buffer. PE (t,c) receives column k of A
// row-block t from LIB bank t (shared along the row of PEs) and row k of B
// column-block c from weight bank c (shared along the column of PEs), so in
// one tile the grid computes the P_T x P_C output blocks
// (m_tile*P_T + t, n_tile*P_C + c).
//
// Timing: `rd_en` with `lib_raddr` reads the LIB; the HCU delays `rd_en`,
// `first` and `last` by one cycle to line them up with the LIB data and with
// `b_vec`, which the weight buffer delivers one cycle after the same read.
// `pe_done` (from PE (0,0); all PEs run in lockstep) pulses when the tile's
// blocks are final; `capture` then moves them into the LOB, which streams them
// out on out_valid/out_addr/out_block.
//
// The LIB / PE grid / LOB structure follows the publication's HPPU drawing.
module hcu
  import vtr_pkg::*;
#(
  parameter int unsigned P_T   = P_T_DEF,
  parameter int unsigned P_C   = P_C_DEF,
  parameter int unsigned P_PE  = P_PE_DEF,
  parameter int unsigned DEPTH = BUF_DEPTH,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic clk,
  input  logic rst_n,
  // LIB load from the global input buffer
  input  logic lib_we,
  input  logic [AW-1:0] lib_waddr,
  input  elem_t [P_T-1:0][P_PE-1:0] lib_wdata,
  // DBMM stream
  input  logic rd_en,
  input  logic [AW-1:0] lib_raddr,
  input  logic first,
  input  logic last,
  input  elem_t [P_C-1:0][P_PE-1:0] b_vec,
  output logic pe_done,
  // result path
  input  logic capture,
  input  logic [AW-1:0] gob_base,
  output logic out_valid,
  output logic [AW-1:0] out_addr,
  output elem_t [P_PE-1:0][P_PE-1:0] out_block,
  output logic lob_busy
);

  elem_t [P_T-1:0][P_PE-1:0] a_rd;
  logic v_q, first_q, last_q;
  acc_t [P_T-1:0][P_C-1:0][P_PE-1:0][P_PE-1:0] acc;
  logic [P_T-1:0][P_C-1:0] done;

  lib #(.P_T(P_T), .P_PE(P_PE), .DEPTH(DEPTH)) u_lib (
    .clk, .we(lib_we), .waddr(lib_waddr), .wdata(lib_wdata),
    .re(rd_en), .raddr(lib_raddr), .rdata(a_rd)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v_q <= 1'b0; first_q <= 1'b0; last_q <= 1'b0;
    end else begin
      v_q <= rd_en; first_q <= first & rd_en; last_q <= last & rd_en;
    end
  end

  for (genvar t = 0; t < P_T; t++) begin : g_t
    for (genvar c = 0; c < P_C; c++) begin : g_c
      pe #(.P_PE(P_PE)) u_pe (
        .clk, .rst_n,
        .a_vec(a_rd[t]), .b_vec(b_vec[c]),
        .v(v_q), .first(first_q), .last(last_q),
        .acc(acc[t][c]), .done(done[t][c])
      );
    end
  end

  always_comb pe_done = done[0][0];

  lob #(.P_T(P_T), .P_C(P_C), .P_PE(P_PE), .AW(AW)) u_lob (
    .clk, .rst_n, .capture, .base(gob_base), .acc,
    .out_valid, .out_addr, .out_block, .busy(lob_busy)
  );

endmodule
