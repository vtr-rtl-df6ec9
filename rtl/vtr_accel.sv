// vtr_accel: accelerator for the VTR vision transformer (SAR target
// recognition), top level.
//
// Two compute units behind one command port: the highly parallel processing
// unit (hppu) for every matrix product of a transformer encoder (linear
// layers, Q K^T per head, S V per head, the projection, the MLP, and the
// row sums of softmax and layer norm as products with a vector of ones) and
// the element-wise compute unit (ecu) for f(A (.) B (+) C) (scaling, LSA
// diagonal mask, exp, GELU, reciprocal, inverse square root, layer-norm
// affine). The host, which shifts and tokenises the image, issues one
// command per step of the layer and moves operands between external memory
// and the on-chip buffers through the buffer ports below; those ports stand
// for the link to the FPGA's external memory, which is not part of this RTL.
//
// Command handshake: `cmd` is taken on a clock edge where cmd_valid and
// cmd_ready are both high; cmd_ready is high while no command runs. `done`
// pulses once per command. OP_LIB_LOAD and OP_DBMM go to the HPPU, OP_ECU to
// the ECU. `hppu_stall` is high in cycles where a finished tile waits for the
// local output buffers to drain.
//
// Buffer ports: GIB and weight words (P_PE elements) and ECU operand blocks
// (P_PE x P_PE elements) are written while idle; GOB and ECU result blocks are
// read with one cycle latency.
//
// The split into HPPU and ECU follows the publication; the command interface,
// the single-command-at-a-time policy and the host ports are this design's.
module vtr_accel
  import vtr_pkg::*;
#(
  parameter int unsigned P_H  = P_H_DEF,
  parameter int unsigned P_T  = P_T_DEF,
  parameter int unsigned P_C  = P_C_DEF,
  parameter int unsigned P_PE = P_PE_DEF,
  localparam int unsigned AW  = BUF_AW,
  localparam int unsigned EAW = $clog2(ECU_DEPTH),
  localparam int unsigned NPE = P_H * P_T * P_C,
  localparam int unsigned NW  = (NPE > 1) ? $clog2(NPE) : 1,
  localparam int unsigned HW  = (P_H > 1) ? $clog2(P_H) : 1,
  localparam int unsigned TW  = (P_T > 1) ? $clog2(P_T) : 1,
  localparam int unsigned CW  = (P_C > 1) ? $clog2(P_C) : 1
) (
  input  logic clk,
  input  logic rst_n,
  // command
  input  logic cmd_valid,
  output logic cmd_ready,
  input  cmd_t cmd,
  output logic done,
  output logic hppu_stall,
  // GIB write
  input  logic gib_we,
  input  logic [TW-1:0] gib_bank,
  input  logic [AW-1:0] gib_addr,
  input  elem_t [P_PE-1:0] gib_wdata,
  // weight buffer write
  input  logic wb_we,
  input  logic [HW-1:0] wb_head,
  input  logic [CW-1:0] wb_bank,
  input  logic [AW-1:0] wb_addr,
  input  elem_t [P_PE-1:0] wb_wdata,
  // GOB read
  input  logic gob_re,
  input  logic [HW-1:0] gob_head,
  input  logic [AW-1:0] gob_addr,
  output elem_t [P_PE-1:0][P_PE-1:0] gob_rdata,
  // ECU operand write
  input  logic ecu_we,
  input  ecu_buf_e ecu_wsel,
  input  logic [NW-1:0] ecu_wbank,
  input  logic [EAW-1:0] ecu_waddr,
  input  elem_t [P_PE-1:0][P_PE-1:0] ecu_wdata,
  // ECU result read
  input  logic ecu_re,
  input  logic [NW-1:0] ecu_rbank,
  input  logic [EAW-1:0] ecu_raddr,
  output elem_t [P_PE-1:0][P_PE-1:0] ecu_rdata
);

  logic h_busy, h_done, e_busy, e_done;
  logic accept;

  always_comb begin
    cmd_ready = !h_busy && !e_busy;
    accept    = cmd_valid && cmd_ready;
    done      = h_done | e_done;
  end

  hppu #(.P_H(P_H), .P_T(P_T), .P_C(P_C), .P_PE(P_PE), .DEPTH(BUF_DEPTH)) u_hppu (
    .clk, .rst_n,
    .start(accept && cmd.op != OP_ECU), .cmd, .busy(h_busy), .done(h_done), .stall(hppu_stall),
    .gib_we, .gib_bank, .gib_addr, .gib_wdata,
    .wb_we, .wb_head, .wb_bank, .wb_addr, .wb_wdata,
    .gob_re, .gob_head, .gob_addr, .gob_rdata
  );

  ecu #(.P_H(P_H), .P_T(P_T), .P_C(P_C), .P_PE(P_PE), .DEPTH(ECU_DEPTH)) u_ecu (
    .clk, .rst_n,
    .start(accept && cmd.op == OP_ECU), .cmd, .busy(e_busy), .done(e_done),
    .we(ecu_we), .wsel(ecu_wsel), .wbank(ecu_wbank), .waddr(ecu_waddr), .wdata(ecu_wdata),
    .re(ecu_re), .rbank(ecu_rbank), .raddr(ecu_raddr), .rdata(ecu_rdata)
  );

  // A command is only offered to an idle accelerator, and buffers are only
  // loaded while no command runs.
  a_cmd_hold: assert property (@(posedge clk) disable iff (!rst_n)
    cmd_valid && !cmd_ready |=> cmd_valid)
    else $error("vtr_accel: cmd_valid dropped before the command was accepted");
  a_no_load_while_busy: assert property (@(posedge clk) disable iff (!rst_n)
    (gib_we || wb_we || ecu_we) |-> cmd_ready)
    else $error("vtr_accel: buffer written while a command runs");

endmodule
