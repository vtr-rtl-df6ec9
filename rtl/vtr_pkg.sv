// vtr_pkg: types and constants shared by the VTR accelerator.
//
// Number format. Every matrix element is a 16-bit two's-complement fixed
// point number with 8 fraction bits (Q8.8). Products are accumulated at 44
// bits and re-quantised to Q8.8 by an arithmetic shift and saturation. The
// number format is this design's choice; the source publication does not give
// one.
//
// Commands. The accelerator executes one command at a time:
//   OP_LIB_LOAD  copy `len` words from the global input buffer, starting at
//                `base`, into the local input buffers of the heads selected by
//                `head_mask` (all ones = broadcast).
//   OP_DBMM      dense block-wise matrix multiply: m_tiles x n_tiles tiles,
//                inner dimension `len` (K), in every head compute unit.
//   OP_ECU       element-wise f(A*B+C) over m_tiles x n_tiles tiles, with
//                optional diagonal masking (Locality Self-Attention).
//
// Function tables. The non-linear functions of the element-wise unit are
// piecewise-linear interpolations between 17 or 33 table points:
//   EXP2_LUT[k]    = round(2^(k/16) * 2^14),                 k = 0..16
//   PHI_LUT[k]     = round(Phi(-4 + k/4) * 2^15),             k = 0..32
//                    (Phi = standard normal CDF, 0.5*(1+erf(x/sqrt 2)))
//   RECIP_LUT[k]   = round(2^15 / (1 + k/16)),                k = 0..16
//   RSQRT_E_LUT[k] = round(2^15 / sqrt(1 + k/16)),            k = 0..16
//   RSQRT_O_LUT[k] = round(2^15 / sqrt(2*(1 + k/16))),        k = 0..16
package vtr_pkg;

  // Array dimensions of the main configuration (p_h, p_t, p_c, p_pe).
  parameter int unsigned P_H_DEF  = 4;
  parameter int unsigned P_T_DEF  = 12;
  parameter int unsigned P_C_DEF  = 2;
  parameter int unsigned P_PE_DEF = 8;

  // Element and accumulator format.
  parameter int unsigned DW    = 16;
  parameter int unsigned FRAC  = 8;
  parameter int unsigned ACC_W = 44;

  // Buffer depths (words of P_PE elements, or blocks for the output side).
  parameter int unsigned BUF_DEPTH = 2048;
  parameter int unsigned BUF_AW    = $clog2(BUF_DEPTH);
  parameter int unsigned ECU_DEPTH = 64;

  typedef logic signed [DW-1:0]    elem_t;
  typedef logic signed [ACC_W-1:0] acc_t;

  localparam elem_t ELEM_MAX = elem_t'(16'sh7FFF);
  localparam elem_t ELEM_MIN = elem_t'(16'sh8000);

  typedef enum logic [1:0] {
    OP_LIB_LOAD = 2'd0,
    OP_DBMM     = 2'd1,
    OP_ECU      = 2'd2
  } op_e;

  typedef enum logic [2:0] {
    F_NONE  = 3'd0,
    F_GELU  = 3'd1,
    F_EXP   = 3'd2,
    F_RECIP = 3'd3,
    F_RSQRT = 3'd4
  } func_e;

  typedef enum logic [1:0] {
    ECU_BUF_A = 2'd0,
    ECU_BUF_B = 2'd1,
    ECU_BUF_C = 2'd2
  } ecu_buf_e;

  typedef struct packed {
    op_e         op;
    logic [7:0]  head_mask;  // OP_LIB_LOAD: destination HCUs (bit h = HCU h)
    logic [BUF_AW-1:0] base; // OP_LIB_LOAD: first GIB word
    logic [BUF_AW:0]   len;  // OP_LIB_LOAD: words; OP_DBMM: inner dimension K
    logic [7:0]  m_tiles;    // OP_DBMM / OP_ECU: tiles along the token axis
    logic [7:0]  n_tiles;    // OP_DBMM / OP_ECU: tiles along the column axis
    func_e       func;       // OP_ECU: f()
    logic        mask_diag;  // OP_ECU: force the diagonal to the minimum
  } cmd_t;

  // Saturate a wide signed value to one element.
  function automatic elem_t sat_elem(input logic signed [ACC_W+1:0] v);
    if (v > $signed({{(ACC_W+2-DW){1'b0}}, ELEM_MAX})) return ELEM_MAX;
    if (v < $signed({{(ACC_W+2-DW){1'b1}}, ELEM_MIN})) return ELEM_MIN;
    return elem_t'(v);
  endfunction

  // Re-quantise an accumulator (Q.16 after a Q8.8 x Q8.8 product) to Q8.8.
  function automatic elem_t requant(input acc_t a);
    return sat_elem((ACC_W+2)'(a >>> FRAC));
  endfunction

  localparam logic [16:0] EXP2_LUT [17] = '{
    17'd16384, 17'd17109, 17'd17867, 17'd18658, 17'd19484, 17'd20347, 17'd21247, 17'd22188, 17'd23170, 17'd24196, 17'd25268, 17'd26386, 17'd27554, 17'd28774, 17'd30048, 17'd31379, 17'd32768};
  localparam logic [16:0] PHI_LUT [33] = '{
    17'd1, 17'd3, 17'd8, 17'd19, 17'd44, 17'd98, 17'd203, 17'd401, 17'd745, 17'd1313, 17'd2189, 17'd3462, 17'd5199, 17'd7426, 17'd10110, 17'd13150, 17'd16384, 17'd19618, 17'd22658, 17'd25342, 17'd27569, 17'd29306, 17'd30579, 17'd31455, 17'd32023, 17'd32367, 17'd32565, 17'd32670, 17'd32724, 17'd32749, 17'd32760, 17'd32765, 17'd32767};
  localparam logic [16:0] RECIP_LUT [17] = '{
    17'd32768, 17'd30840, 17'd29127, 17'd27594, 17'd26214, 17'd24966, 17'd23831, 17'd22795, 17'd21845, 17'd20972, 17'd20165, 17'd19418, 17'd18725, 17'd18079, 17'd17476, 17'd16913, 17'd16384};
  localparam logic [16:0] RSQRT_E_LUT [17] = '{
    17'd32768, 17'd31790, 17'd30894, 17'd30070, 17'd29309, 17'd28602, 17'd27945, 17'd27330, 17'd26755, 17'd26214, 17'd25705, 17'd25225, 17'd24770, 17'd24339, 17'd23930, 17'd23541, 17'd23170};
  localparam logic [16:0] RSQRT_O_LUT [17] = '{
    17'd23170, 17'd22479, 17'd21845, 17'd21263, 17'd20724, 17'd20225, 17'd19760, 17'd19326, 17'd18919, 17'd18536, 17'd18176, 17'd17837, 17'd17515, 17'd17211, 17'd16921, 17'd16646, 17'd16384};

endpackage
