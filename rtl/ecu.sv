// ecu: element-wise compute unit.
//
// Built like the HPPU: P_H x P_T x P_C element-wise PEs (PE (h,t,c) plays the
// role of PE (t,c) of HCU h), each handling one P_PE x P_PE block per cycle.
// It has four buffers: A, B and C operands and the result R, each with one
// bank per PE. Bank n = (h*P_T + t)*P_C + c, address `tile` holds block
// (m_tile*P_T + t, n_tile*P_C + c) of head h, tile = m_tile*n_tiles + n_tile;
// this is the same placement as the HPPU's global output buffer, so an HPPU
// result can be copied block for block into A.
//
// An OP_ECU command walks the tiles; in each cycle all PEs read their block
// at the tile address and compute R = f(A (.) B (+) C). With mask_diag set,
// the PEs whose block row equals their block column apply the diagonal mask
// of Locality Self-Attention (scaled attention with -inf on the diagonal,
// ready for exp). Typical uses: A*(1/lambda) + mask then exp (softmax
// numerator), exp-sum * reciprocal (softmax normalisation), (X - mu) * gamma
// (1/sigma folded in) + beta (layer norm), GELU of the first MLP layer.
//
// Timing: `start`/`cmd` while idle; tile n is read n+1 cycles after the start
// edge and its result written 2 cycles later; `done` is high in the cycle
// after edge T + 4 (counting the start edge as 0) for a command of T tiles. Host writes (wsel, wbank, waddr) while idle;
// host reads of R have one cycle latency.
//
// The four buffers, the identical structure and the operation follow the
// publication; the bank/address map, widths and timing are this design's.
module ecu
  import vtr_pkg::*;
#(
  parameter int unsigned P_H   = P_H_DEF,
  parameter int unsigned P_T   = P_T_DEF,
  parameter int unsigned P_C   = P_C_DEF,
  parameter int unsigned P_PE  = P_PE_DEF,
  parameter int unsigned DEPTH = ECU_DEPTH,
  localparam int unsigned NPE  = P_H * P_T * P_C,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned NW   = (NPE > 1) ? $clog2(NPE) : 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  cmd_t cmd,
  output logic busy,
  output logic done,
  // host write of A/B/C
  input  logic we,
  input  ecu_buf_e wsel,
  input  logic [NW-1:0] wbank,
  input  logic [AW-1:0] waddr,
  input  elem_t [P_PE-1:0][P_PE-1:0] wdata,
  // host read of R
  input  logic re,
  input  logic [NW-1:0] rbank,
  input  logic [AW-1:0] raddr,
  output elem_t [P_PE-1:0][P_PE-1:0] rdata
);

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_END} state_e;
  state_e state;
  cmd_t c_q;
  logic [7:0] mt, nt;
  logic [15:0] rbase, cbase;        // block row/column of PE (h,0,0)
  logic [AW-1:0] tile;
  logic [2:0] tail;

  wire last_tile = (mt == c_q.m_tiles - 1'b1) && (nt == c_q.n_tiles - 1'b1);
  wire rd        = (state == S_RUN);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; c_q <= '0; mt <= '0; nt <= '0; rbase <= '0; cbase <= '0;
      tile <= '0; tail <= '0; done <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          c_q <= cmd; mt <= '0; nt <= '0; rbase <= '0; cbase <= '0; tile <= '0;
          if (cmd.op == OP_ECU && cmd.m_tiles != '0 && cmd.n_tiles != '0) state <= S_RUN;
          else done <= 1'b1;
        end
        S_RUN: begin
          tile <= tile + 1'b1;
          if (nt == c_q.n_tiles - 1'b1) begin
            nt <= '0; cbase <= '0; mt <= mt + 1'b1; rbase <= rbase + 16'(P_T);
          end else begin
            nt <= nt + 1'b1; cbase <= cbase + 16'(P_C);
          end
          if (last_tile) begin
            state <= S_END;
            tail  <= 3'd2;
          end
        end
        S_END: begin
          tail <= tail - 1'b1;
          if (tail == 3'd0) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb busy = (state != S_IDLE);

  // read stage -> compute stage alignment
  logic          v1;
  logic [AW-1:0] tile1, tile2;
  logic [15:0]   rbase1, cbase1;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; tile1 <= '0; tile2 <= '0; rbase1 <= '0; cbase1 <= '0;
    end else begin
      v1 <= rd; tile1 <= tile; tile2 <= tile1; rbase1 <= rbase; cbase1 <= cbase;
    end
  end

  elem_t [NPE-1:0][P_PE-1:0][P_PE-1:0] r_q;
  logic  [NW-1:0] rbank_q;

  for (genvar h = 0; h < P_H; h++) begin : g_h
    for (genvar t = 0; t < P_T; t++) begin : g_t
      for (genvar c = 0; c < P_C; c++) begin : g_c
        localparam int unsigned N = (h*P_T + t)*P_C + c;
        elem_t [P_PE-1:0][P_PE-1:0] mem_a [DEPTH];
        elem_t [P_PE-1:0][P_PE-1:0] mem_b [DEPTH];
        elem_t [P_PE-1:0][P_PE-1:0] mem_c [DEPTH];
        elem_t [P_PE-1:0][P_PE-1:0] mem_r [DEPTH];
        elem_t [P_PE-1:0][P_PE-1:0] a_q, b_q, c_q2, y;
        logic v2;
        logic diag;

        always_ff @(posedge clk) begin
          if (we && wbank == NW'(N) && wsel == ECU_BUF_A) mem_a[waddr] <= wdata;
          if (we && wbank == NW'(N) && wsel == ECU_BUF_B) mem_b[waddr] <= wdata;
          if (we && wbank == NW'(N) && wsel == ECU_BUF_C) mem_c[waddr] <= wdata;
          if (rd) begin
            a_q  <= mem_a[tile];
            b_q  <= mem_b[tile];
            c_q2 <= mem_c[tile];
          end
          if (v2) mem_r[tile2] <= y;
          if (re) r_q[N] <= mem_r[raddr];
        end

        always_comb diag = c_q.mask_diag && (rbase1 + 16'(t) == cbase1 + 16'(c));

        ecu_pe #(.P_PE(P_PE)) u_pe (
          .clk, .rst_n, .v_in(v1), .func(c_q.func), .mask_en(diag),
          .a(a_q), .b(b_q), .c(c_q2), .v_out(v2), .y
        );
      end
    end
  end

  always_ff @(posedge clk) if (re) rbank_q <= rbank;
  always_comb rdata = r_q[rbank_q];

endmodule
