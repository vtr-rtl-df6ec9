// tb_weight_buffer: self-checking test of the weight buffer at its default
// size. Fills a few addresses of every (head, bank) local buffer with random
// words, then reads each address and checks that all P_H x P_C banks return
// their own word one cycle later.
module tb_weight_buffer;
  import vtr_pkg::*;
  localparam int PH = P_H_DEF, PC = P_C_DEF, P = P_PE_DEF, D = BUF_DEPTH;
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
  logic [$clog2(PH)-1:0] whead;
  logic [$clog2(PC)-1:0] wbank;
  logic [BUF_AW-1:0] waddr, raddr;
  elem_t [P-1:0] wdata;
  elem_t [PH-1:0][PC-1:0][P-1:0] rdata;
  weight_buffer dut (.*);

  elem_t [PH-1:0][PC-1:0][P-1:0] model [12];
  int addrs [12];

  initial begin
    we = 0; re = 0; waddr = '0; raddr = '0; wdata = '0; whead = '0; wbank = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int n = 0; n < 12; n++) addrs[n] = (n == 0) ? D-1 : (n * 173) % D;
    for (int n = 0; n < 12; n++)
      for (int h = 0; h < PH; h++)
        for (int c = 0; c < PC; c++) begin
          @(negedge clk);
          we = 1; whead = $clog2(PH)'(h); wbank = $clog2(PC)'(c); waddr = BUF_AW'(addrs[n]);
          for (int i = 0; i < P; i++) wdata[i] = elem_t'($urandom);
          model[n][h][c] = wdata;
        end
    @(negedge clk); we = 0;
    for (int n = 0; n < 12; n++) begin
      @(negedge clk); re = 1; raddr = BUF_AW'(addrs[n]);
      @(posedge clk); #1;
      check(rdata == model[n], $sformatf("read addr %0d", addrs[n]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
