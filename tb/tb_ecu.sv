// tb_ecu: self-checking test of the element-wise compute unit (reduced to 2
// heads of 2 x 2 PEs of 4 x 4). Runs the LSA softmax numerator
// exp(A * (1/lambda) + mask) over 2 x 3 tiles with diagonal masking and
// checks every element (0 on the matrix diagonal of each head, exp elsewhere)
// and the cycle count (tiles + 4); then a GELU command over one tile with a
// non-trivial B and C.
module tb_ecu;
  import vtr_pkg::*;
  import ecu_ref_pkg::*;
  localparam int PH = 2, PT = 2, PC = 2, P = 4, D = 16, AW = 4, NPE = PH*PT*PC, NW = 3;
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
  logic start, busy, done, we, re;
  cmd_t cmd;
  ecu_buf_e wsel;
  logic [NW-1:0] wbank, rbank;
  logic [AW-1:0] waddr, raddr;
  elem_t [P-1:0][P-1:0] wdata, rdata;

  ecu #(.P_H(PH), .P_T(PT), .P_C(PC), .P_PE(P), .DEPTH(D)) dut (.*);

  elem_t [P-1:0][P-1:0] ma [NPE][D];
  elem_t [P-1:0][P-1:0] mb [NPE][D];
  elem_t [P-1:0][P-1:0] mc [NPE][D];
  longint cyc = 0;
  always @(posedge clk) cyc++;

  task automatic put(input ecu_buf_e s, input int n, input int a, input elem_t [P-1:0][P-1:0] d);
    @(negedge clk); we = 1; wsel = s; wbank = NW'(n); waddr = AW'(a); wdata = d;
    @(negedge clk); we = 0;
  endtask

  task automatic run(input cmd_t c, output longint cycles);
    longint t0;
    @(negedge clk); cmd = c; start = 1; t0 = cyc;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    cycles = cyc - t0;
  endtask

  task automatic verify(input int f, input int MT, input int NT, input bit masked, output int bad, output int ndiag);
    bad = 0; ndiag = 0;
    for (int h = 0; h < PH; h++) for (int t = 0; t < PT; t++) for (int c = 0; c < PC; c++)
      for (int tl = 0; tl < MT*NT; tl++) begin
        int n, rb, cb;
        n = (h*PT + t)*PC + c;
        rb = (tl / NT)*PT + t; cb = (tl % NT)*PC + c;
        @(negedge clk); re = 1; rbank = NW'(n); raddr = AW'(tl);
        @(negedge clk); re = 0;
        for (int i = 0; i < P; i++) for (int j = 0; j < P; j++) begin
          int xi;
          xi = ref_x(int'(ma[n][tl][i][j]), int'(mb[n][tl][i][j]), int'(mc[n][tl][i][j]));
          if (masked && rb == cb && i == j) begin
            ndiag++;
            if (rdata[i][j] != '0) bad++;
          end else if (!ref_ok(f, xi, int'(rdata[i][j]))) bad++;
        end
      end
  endtask

  initial begin
    cmd_t c;
    longint cy;
    int bad, ndiag;
    start = 0; cmd = '0; we = 0; re = 0; wsel = ECU_BUF_A; wbank = '0; rbank = '0;
    waddr = '0; raddr = '0; wdata = '0;
    repeat (2) @(posedge clk); rst_n = 1;

    // softmax numerator with LSA mask, lambda = 2 (B = 0.5)
    for (int n = 0; n < NPE; n++) for (int tl = 0; tl < 6; tl++) begin
      for (int i = 0; i < P; i++) for (int j = 0; j < P; j++) begin
        ma[n][tl][i][j] = elem_t'($signed($urandom) >>> 21);
        mb[n][tl][i][j] = elem_t'(128);
        mc[n][tl][i][j] = '0;
      end
      put(ECU_BUF_A, n, tl, ma[n][tl]); put(ECU_BUF_B, n, tl, mb[n][tl]); put(ECU_BUF_C, n, tl, mc[n][tl]);
    end
    c = '0; c.op = OP_ECU; c.m_tiles = 8'd2; c.n_tiles = 8'd3; c.func = F_EXP; c.mask_diag = 1'b1;
    run(c, cy);
    check(cy == 6 + 4, $sformatf("ECU 6 tiles took %0d cycles", cy));
    verify(2, 2, 3, 1'b1, bad, ndiag);
    check(bad == 0, $sformatf("masked exp: %0d bad elements", bad));
    check(ndiag == PH * 4 * P, $sformatf("diagonal elements seen: %0d", ndiag));

    // GELU over one tile, general B and C
    for (int n = 0; n < NPE; n++) begin
      for (int i = 0; i < P; i++) for (int j = 0; j < P; j++) begin
        ma[n][0][i][j] = elem_t'($signed($urandom) >>> 20);
        mb[n][0][i][j] = elem_t'($signed($urandom) >>> 22);
        mc[n][0][i][j] = elem_t'($signed($urandom) >>> 21);
      end
      put(ECU_BUF_A, n, 0, ma[n][0]); put(ECU_BUF_B, n, 0, mb[n][0]); put(ECU_BUF_C, n, 0, mc[n][0]);
    end
    c = '0; c.op = OP_ECU; c.m_tiles = 8'd1; c.n_tiles = 8'd1; c.func = F_GELU;
    run(c, cy);
    verify(1, 1, 1, 1'b0, bad, ndiag);
    check(bad == 0, $sformatf("GELU: %0d bad elements", bad));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
