// tb_lib: self-checking test of the local input buffer at its default size.
// Writes random words to random addresses (all banks at once), reads them
// back and checks data and the one-cycle read latency; also checks that a
// read with re low keeps the previous output.
module tb_lib;
  import vtr_pkg::*;
  localparam int PT = P_T_DEF, P = P_PE_DEF, D = BUF_DEPTH;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask
  logic we, re;
  logic [BUF_AW-1:0] waddr, raddr;
  elem_t [PT-1:0][P-1:0] wdata, rdata;
  lib dut (.*);

  elem_t [PT-1:0][P-1:0] model [int];
  int addrs [64];

  initial begin
    we = 0; re = 0; waddr = '0; raddr = '0; wdata = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 64; n++) begin
      @(negedge clk);
      addrs[n] = (n < 2) ? n * (D-1) : $urandom % D;
      we = 1; waddr = BUF_AW'(addrs[n]);
      for (int t = 0; t < PT; t++) for (int i = 0; i < P; i++) wdata[t][i] = elem_t'($urandom);
      model[addrs[n]] = wdata;
    end
    @(negedge clk); we = 0;
    for (int n = 0; n < 64; n++) begin
      @(negedge clk); re = 1; raddr = BUF_AW'(addrs[n]);
      @(posedge clk); #1;
      check(rdata == model[addrs[n]], $sformatf("read addr %0d", addrs[n]));
    end
    @(negedge clk); re = 0; raddr = BUF_AW'(addrs[0]);
    @(posedge clk); #1;
    check(rdata == model[addrs[63]], "output held while re is low");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
