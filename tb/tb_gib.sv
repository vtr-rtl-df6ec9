// tb_gib: self-checking test of the global input buffer at its default size.
// Writes random words into random banks and addresses one at a time, then
// reads addresses back (all banks in parallel) and compares with a model,
// checking the one-cycle read latency.
module tb_gib;
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
  logic [$clog2(PT)-1:0] wbank;
  logic [BUF_AW-1:0] waddr, raddr;
  elem_t [P-1:0] wdata;
  elem_t [PT-1:0][P-1:0] rdata;
  gib dut (.*);

  elem_t [PT-1:0][P-1:0] model [16];
  int addrs [16];

  initial begin
    we = 0; re = 0; waddr = '0; raddr = '0; wdata = '0; wbank = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 16; n++) addrs[n] = (n == 0) ? D-1 : (n * 131) % D;
    for (int n = 0; n < 16; n++)
      for (int t = 0; t < PT; t++) begin
        @(negedge clk);
        we = 1; wbank = $clog2(PT)'(t); waddr = BUF_AW'(addrs[n]);
        for (int i = 0; i < P; i++) wdata[i] = elem_t'($urandom);
        model[n][t] = wdata;
      end
    @(negedge clk); we = 0;
    for (int n = 15; n >= 0; n--) begin
      @(negedge clk); re = 1; raddr = BUF_AW'(addrs[n]);
      @(posedge clk); #1;
      check(rdata == model[n], $sformatf("read addr %0d", addrs[n]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
