// gib: global input buffer of the HPPU.
//
// Stores the input feature matrix written by the host, in the same layout as
// the local input buffers (P_T banks, word = P_PE elements, bank t address a
// = column of A row-block t of the tile the address belongs to). The
// controller streams a range of words out of it, all banks in parallel, into
// the local input buffers of the selected head compute units.
//
// Ports: host write of one word into one bank; stream read of one address in
// all banks, registered, one cycle latency. No reset on the storage.
//
// The buffer and its broadcast role follow the publication; layout, ports and
// depth are this design's choices.
module gib
  import vtr_pkg::*;
#(
  parameter int unsigned P_T   = P_T_DEF,
  parameter int unsigned P_PE  = P_PE_DEF,
  parameter int unsigned DEPTH = BUF_DEPTH,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned BW   = (P_T > 1) ? $clog2(P_T) : 1
) (
  input  logic clk,
  input  logic we,
  input  logic [BW-1:0] wbank,
  input  logic [AW-1:0] waddr,
  input  elem_t [P_PE-1:0] wdata,
  input  logic re,
  input  logic [AW-1:0] raddr,
  output elem_t [P_T-1:0][P_PE-1:0] rdata
);

  for (genvar t = 0; t < P_T; t++) begin : g_bank
    elem_t [P_PE-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (we && wbank == BW'(t)) mem[waddr] <= wdata;
      if (re) rdata[t] <= mem[raddr];
    end
  end

endmodule
