// hppu_ctrl: controller of the highly parallel processing unit.
//
// Executes one command at a time (see vtr_pkg):
//   OP_LIB_LOAD  reads GIB words base .. base+len-1 (all banks in parallel)
//                and writes them one cycle later to LIB addresses 0 .. len-1
//                of every HCU whose bit is set in head_mask.
//   OP_DBMM      walks the tiles, m_tile outer and n_tile inner. For each
//                tile it issues K = len reads, LIB address m_tile*K + k and
//                weight address n_tile*K + k, flagging k = 0 as first and
//                k = K-1 as last; it then waits for the PEs' done pulse and for
//                the LOBs to be free, captures the results into the LOBs with
//                GOB base tile*P_T*P_C, and moves on. The LOB stream of one
//                tile overlaps the compute of the next; when the next tile
//                finishes first (K < P_T*P_C - 2*P_PE + 2) the controller
//                holds the capture (output `stall` high) until the stream ends.
// After the last tile it waits for the streams to drain and pulses `done`.
//
// Timing of a DBMM tile: K issue cycles, then 2*P_PE further cycles until the
// capture (one cycle of buffer read, 2*P_PE-2 cycles of array skew and one of
// capture), unless stalled. A LIB load takes len + 2 cycles.
//
// Only the controller's existence and position are from the publication; the
// command set, tile order and state machine are this design's own.
module hppu_ctrl
  import vtr_pkg::*;
#(
  parameter int unsigned P_H  = P_H_DEF,
  parameter int unsigned P_T  = P_T_DEF,
  parameter int unsigned P_C  = P_C_DEF,
  parameter int unsigned AW   = BUF_AW
) (
  input  logic clk,
  input  logic rst_n,
  input  logic start,
  input  cmd_t cmd,
  output logic busy,
  output logic done,
  // LIB load
  output logic gib_re,
  output logic [AW-1:0] gib_raddr,
  output logic [P_H-1:0] lib_we,
  output logic [AW-1:0] lib_waddr,
  // DBMM stream
  output logic rd_en,
  output logic [AW-1:0] lib_raddr,
  output logic [AW-1:0] wb_raddr,
  output logic first,
  output logic last,
  input  logic pe_done,
  input  logic lob_busy,
  output logic capture,
  output logic [AW-1:0] gob_base,
  output logic stall
);

  localparam int unsigned NB = P_T * P_C;

  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_LOAD_END, S_ISSUE, S_WAIT, S_DRAIN} state_e;
  state_e state;

  cmd_t c_q;
  logic [AW:0]   cnt;        // load word / k counter
  logic [7:0]    mt, nt;
  logic [AW-1:0] lib_base, wb_base, gob_b;
  logic          pe_seen;
  logic          ld_we_q;
  logic [AW-1:0] ld_addr_q;

  wire k_last   = (cnt == c_q.len - 1'b1);
  wire ready_pe = pe_seen | pe_done;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; c_q <= '0; cnt <= '0; mt <= '0; nt <= '0;
      lib_base <= '0; wb_base <= '0; gob_b <= '0; pe_seen <= 1'b0;
      ld_we_q <= 1'b0; ld_addr_q <= '0; done <= 1'b0;
    end else begin
      done    <= 1'b0;
      ld_we_q <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          c_q <= cmd; cnt <= '0; mt <= '0; nt <= '0;
          lib_base <= '0; wb_base <= '0; gob_b <= '0; pe_seen <= 1'b0;
          if (cmd.len == '0 || (cmd.op == OP_DBMM && (cmd.m_tiles == '0 || cmd.n_tiles == '0)))
            done <= 1'b1;
          else if (cmd.op == OP_LIB_LOAD) state <= S_LOAD;
          else if (cmd.op == OP_DBMM)     state <= S_ISSUE;
          else                            done  <= 1'b1;  // not an HPPU command
        end
        S_LOAD: begin
          ld_we_q   <= 1'b1;
          ld_addr_q <= cnt[AW-1:0];
          cnt       <= cnt + 1'b1;
          if (k_last) state <= S_LOAD_END;
        end
        S_LOAD_END: begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        S_ISSUE: begin
          cnt <= cnt + 1'b1;
          if (k_last) begin
            cnt     <= '0;
            pe_seen <= 1'b0;
            state   <= S_WAIT;
          end
        end
        S_WAIT: begin
          if (pe_done) pe_seen <= 1'b1;
          if (ready_pe && !lob_busy) begin
            pe_seen <= 1'b0;
            gob_b   <= gob_b + AW'(NB);
            if (nt == c_q.n_tiles - 1'b1) begin
              nt      <= '0;
              wb_base <= '0;
              if (mt == c_q.m_tiles - 1'b1) begin
                state <= S_DRAIN;
              end else begin
                mt       <= mt + 1'b1;
                lib_base <= lib_base + c_q.len[AW-1:0];
                state    <= S_ISSUE;
              end
            end else begin
              nt      <= nt + 1'b1;
              wb_base <= wb_base + c_q.len[AW-1:0];
              state   <= S_ISSUE;
            end
          end
        end
        S_DRAIN: if (!lob_busy && !capture) begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    busy      = (state != S_IDLE);
    gib_re    = (state == S_LOAD);
    gib_raddr = c_q.base + cnt[AW-1:0];
    lib_we    = ld_we_q ? c_q.head_mask[P_H-1:0] : '0;
    lib_waddr = ld_addr_q;
    rd_en     = (state == S_ISSUE);
    lib_raddr = lib_base + cnt[AW-1:0];
    wb_raddr  = wb_base + cnt[AW-1:0];
    first     = (state == S_ISSUE) && (cnt == '0);
    last      = (state == S_ISSUE) && k_last;
    capture   = (state == S_WAIT) && ready_pe && !lob_busy;
    gob_base  = gob_b;
    stall     = (state == S_WAIT) && ready_pe && lob_busy;
  end

endmodule
