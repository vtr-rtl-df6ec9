// tb_hppu: self-checking test of the HPPU (reduced to 2 heads, 2 x 2 PEs of
// 4 x 4). Case 1: one input matrix broadcast to both HCUs' LIBs and a DBMM of
// 2 x 2 tiles with K = 5 and a different weight matrix per head (a linear
// layer split into "fictitious heads"). Case 2: a different left matrix per
// head loaded with one-hot head masks (as for Q_i K_i^T), K = 3. Every GOB
// block is read back and compared with the product computed here, re-
// quantised to Q8.8. The DBMM cycle count is checked against the controller's
// schedule.
module tb_hppu;
  import vtr_pkg::*;
  localparam int PH = 2, PT = 2, PC = 2, P = 4, D = 256, AW = 8, NB = PT * PC;
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

  function automatic int ref_q(input longint a);
    longint q;
    q = a >>> 8;
    if (q > 32767) q = 32767;
    if (q < -32768) q = -32768;
    return int'(q);
  endfunction
  logic start, busy, done, stall, gib_we, wb_we, gob_re;
  cmd_t cmd;
  logic gib_bank, wb_head, wb_bank, gob_head;
  logic [AW-1:0] gib_addr, wb_addr, gob_addr;
  elem_t [P-1:0] gib_wdata, wb_wdata;
  elem_t [P-1:0][P-1:0] gob_rdata;

  hppu #(.P_H(PH), .P_T(PT), .P_C(PC), .P_PE(P), .DEPTH(D)) dut (.*);

  // matrices: A[h][row][k], B[h][k][col]
  elem_t A [PH][64][16];
  elem_t B [PH][16][64];
  longint cyc = 0;
  always @(posedge clk) cyc++;

  task automatic run(input cmd_t c, output longint cycles);
    longint t0;
    @(negedge clk); cmd = c; start = 1; t0 = cyc;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    cycles = cyc - t0;
  endtask

  // write left matrix of head h into the GIB at `base` (layout of the LIB)
  task automatic put_gib(input int h, input int base, input int MT, input int K);
    for (int mt = 0; mt < MT; mt++) for (int t = 0; t < PT; t++) for (int k = 0; k < K; k++) begin
      @(negedge clk);
      gib_we = 1; gib_bank = 1'(t); gib_addr = AW'(base + mt*K + k);
      for (int i = 0; i < P; i++) gib_wdata[i] = A[h][(mt*PT + t)*P + i][k];
    end
    @(negedge clk); gib_we = 0;
  endtask

  task automatic put_wb(input int h, input int NT, input int K);
    for (int nt = 0; nt < NT; nt++) for (int c = 0; c < PC; c++) for (int k = 0; k < K; k++) begin
      @(negedge clk);
      wb_we = 1; wb_head = 1'(h); wb_bank = 1'(c); wb_addr = AW'(nt*K + k);
      for (int j = 0; j < P; j++) wb_wdata[j] = B[h][k][(nt*PC + c)*P + j];
    end
    @(negedge clk); wb_we = 0;
  endtask

  task automatic compare(input int MT, input int NT, input int K, input string tag);
    for (int h = 0; h < PH; h++)
      for (int mt = 0; mt < MT; mt++) for (int nt = 0; nt < NT; nt++)
        for (int t = 0; t < PT; t++) for (int c = 0; c < PC; c++) begin
          int bad;
          bad = 0;
          @(negedge clk);
          gob_re = 1; gob_head = 1'(h); gob_addr = AW'((mt*NT + nt)*NB + t*PC + c);
          @(negedge clk); gob_re = 0;
          for (int i = 0; i < P; i++) for (int j = 0; j < P; j++) begin
            longint s;
            s = 0;
            for (int k = 0; k < K; k++)
              s += longint'(A[h][(mt*PT + t)*P + i][k]) * longint'(B[h][k][(nt*PC + c)*P + j]);
            if (int'(gob_rdata[i][j]) != ref_q(s)) bad++;
          end
          check(bad == 0, $sformatf("%s head %0d tile (%0d,%0d) PE (%0d,%0d): %0d bad", tag, h, mt, nt, t, c, bad));
        end
  endtask

  initial begin
    cmd_t c;
    longint cy;
    int stalls;
    start = 0; cmd = '0; gib_we = 0; wb_we = 0; gob_re = 0;
    gib_bank = 0; wb_head = 0; wb_bank = 0; gob_head = 0; gib_addr = '0; wb_addr = '0; gob_addr = '0;
    gib_wdata = '0; wb_wdata = '0;
    repeat (2) @(posedge clk); rst_n = 1;

    // ---- case 1: broadcast, MT = NT = 2, K = 5
    for (int r = 0; r < 16; r++) for (int k = 0; k < 5; k++) begin
      A[0][r][k] = elem_t'($signed($urandom) >>> 20); A[1][r][k] = A[0][r][k];
    end
    for (int h = 0; h < PH; h++) for (int k = 0; k < 5; k++) for (int col = 0; col < 16; col++)
      B[h][k][col] = elem_t'($signed($urandom) >>> 20);
    put_gib(0, 0, 2, 5);
    put_wb(0, 2, 5); put_wb(1, 2, 5);
    c = '0; c.op = OP_LIB_LOAD; c.base = '0; c.len = (AW+4)'(10); c.head_mask = 8'b11;
    run(c, cy);
    check(cy == 10 + 2, $sformatf("LIB load cycles %0d", cy));
    c = '0; c.op = OP_DBMM; c.len = 12'(5); c.m_tiles = 8'd2; c.n_tiles = 8'd2;
    stalls = 0;
    fork
      run(c, cy);
      begin while (busy || start) begin @(negedge clk); if (stall) stalls++; end end
    join
    // per tile: K issue cycles + 2P until capture; 4 tiles; then the last
    // stream of NB blocks and the done register.
    $display("DBMM 2x2 tiles K=5: %0d cycles, %0d stall cycles", cy, stalls);
    check(cy == 4 * (5 + 2*P) + NB + 2, $sformatf("DBMM cycles %0d expected %0d", cy, 4 * (5 + 2*P) + NB + 2));
    compare(2, 2, 5, "broadcast");

    // ---- case 2: per-head left matrices, MT = NT = 1, K = 3
    for (int h = 0; h < PH; h++) begin
      for (int r = 0; r < 8; r++) for (int k = 0; k < 3; k++) A[h][r][k] = elem_t'($signed($urandom) >>> 18);
      for (int k = 0; k < 3; k++) for (int col = 0; col < 8; col++) B[h][k][col] = elem_t'($signed($urandom) >>> 18);
      put_gib(h, 100 + 50*h, 1, 3);
      put_wb(h, 1, 3);
    end
    for (int h = 0; h < PH; h++) begin
      c = '0; c.op = OP_LIB_LOAD; c.base = AW'(100 + 50*h); c.len = 12'(3); c.head_mask = 8'(1 << h);
      run(c, cy);
    end
    c = '0; c.op = OP_DBMM; c.len = 12'(3); c.m_tiles = 8'd1; c.n_tiles = 8'd1;
    run(c, cy);
    compare(1, 1, 3, "per-head");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
