// tb_gob: self-checking test of the global output buffer at its default
// size. All P_H write ports write random blocks in the same cycles (different
// addresses per head), then the host port reads every (head, address) back
// and checks data and the one-cycle latency.
module tb_gob;
  import vtr_pkg::*;
  localparam int PH = P_H_DEF, P = P_PE_DEF, D = BUF_DEPTH;
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
  logic [PH-1:0] we;
  logic re;
  logic [PH-1:0][BUF_AW-1:0] waddr;
  logic [$clog2(PH)-1:0] rhead;
  logic [BUF_AW-1:0] raddr;
  elem_t [PH-1:0][P-1:0][P-1:0] wdata;
  elem_t [P-1:0][P-1:0] rdata;
  gob dut (.*);

  elem_t [P-1:0][P-1:0] model [PH][10];
  int addr_of [PH][10];

  initial begin
    we = '0; re = 0; waddr = '0; raddr = '0; wdata = '0; rhead = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 10; n++) begin
      @(negedge clk);
      for (int h = 0; h < PH; h++) begin
        addr_of[h][n] = (n * 97 + h * 500 + (n == 9 ? D - 1 - 97*9 - h*500 : 0)) % D;
        we[h] = 1; waddr[h] = BUF_AW'(addr_of[h][n]);
        for (int i = 0; i < P; i++) for (int j = 0; j < P; j++) wdata[h][i][j] = elem_t'($urandom);
        model[h][n] = wdata[h];
      end
    end
    @(negedge clk); we = '0;
    for (int n = 0; n < 10; n++)
      for (int h = PH-1; h >= 0; h--) begin
        @(negedge clk); re = 1; rhead = $clog2(PH)'(h); raddr = BUF_AW'(addr_of[h][n]);
        @(posedge clk); #1;
        check(rdata == model[h][n], $sformatf("read head %0d addr %0d", h, addr_of[h][n]));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
