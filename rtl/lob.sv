// lob: local output buffer (result buffer) of one head compute unit.
//
// On `capture` it takes the accumulators of all P_T x P_C PEs of the HCU,
// re-quantises each element to Q8.8 (arithmetic shift right by FRAC bits,
// saturation to 16 bits) and then streams the blocks to the global output
// buffer, one block per cycle, PE (t,c) as block number n = t*P_C + c at GOB
// address base + n. Holding the results here lets the PEs start the next tile
// right after the capture, while the stream is still running.
//
// Timing: capture at edge e; blocks leave on out_valid in the P_T*P_C cycles
// after e (the first one in the cycle right after). `busy` is high during the
// stream. A capture while busy is a protocol error (assertion); the
// controller waits for `busy` to fall.
//
// The buffer follows the publication ("Local Output Buffers", drawn as
// "Result Buffers"); re-quantisation and the serial stream are this design's.
module lob
  import vtr_pkg::*;
#(
  parameter int unsigned P_T  = P_T_DEF,
  parameter int unsigned P_C  = P_C_DEF,
  parameter int unsigned P_PE = P_PE_DEF,
  parameter int unsigned AW   = BUF_AW,
  localparam int unsigned NB  = P_T * P_C
) (
  input  logic clk,
  input  logic rst_n,
  input  logic capture,
  input  logic [AW-1:0] base,
  input  acc_t [P_T-1:0][P_C-1:0][P_PE-1:0][P_PE-1:0] acc,
  output logic out_valid,
  output logic [AW-1:0] out_addr,
  output elem_t [P_PE-1:0][P_PE-1:0] out_block,
  output logic busy
);

  elem_t [NB-1:0][P_PE-1:0][P_PE-1:0] blk;
  logic  [$clog2(NB+1)-1:0] left;
  logic  [AW-1:0] addr_q;

  always_ff @(posedge clk) begin
    if (capture) begin
      for (int t = 0; t < P_T; t++)
        for (int c = 0; c < P_C; c++)
          for (int i = 0; i < P_PE; i++)
            for (int j = 0; j < P_PE; j++)
              blk[t*P_C+c][i][j] <= requant(acc[t][c][i][j]);
    end else if (busy) begin
      for (int n = 0; n < NB-1; n++) blk[n] <= blk[n+1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      left   <= '0;
      addr_q <= '0;
    end else if (capture) begin
      left   <= ($clog2(NB+1))'(NB);
      addr_q <= base;
    end else if (busy) begin
      left   <= left - 1'b1;
      addr_q <= addr_q + 1'b1;
    end
  end

  always_comb begin
    busy      = (left != '0);
    out_valid = busy;
    out_addr  = addr_q;
    out_block = blk[0];
  end

  a_no_capture_while_busy: assert property (@(posedge clk) disable iff (!rst_n) capture |-> !busy)
    else $error("lob: capture while the previous tile is still streaming");

endmodule
