// tb_vtr_full: the end-to-end test of tb_vtr_accel with the accelerator at
// its default size (4 heads of 12 x 2 PEs of 8 x 8, no parameter overrides).
//
// It runs one Locality Self-Attention head per HCU, as a host would issue it:
//   0. broadcast LIB load and a K = 1 DBMM over two n-tiles (an outer
//      product; each tile finishes before the previous tile's results have
//      drained from the local output buffers, so the controller stalls)
//   1. per-head LIB load of Q_h, K_h^T into the weights, DBMM  -> A = Q K^T
//   2. ECU: exp(A * (1/lambda) + Cpad) with the diagonal mask -> E
//      (Cpad = -128 on the padding columns so padding tokens get weight 0)
//   3. per-head LIB load of E, DBMM with a matrix of ones      -> row sums
//   4. ECU: reciprocal of the row sums; ECU: E * (1/sum)       -> S
//   5. per-head LIB load of S, V into the weights, DBMM        -> O = S V
//   6. ECU: GELU(O) and 1/sqrt(row sums)
// Every DBMM result is compared exactly with an integer model of the
// Q8.8 arithmetic, every ECU result with the function within the tolerance
// of its table, and O with a real-arithmetic softmax attention with the
// diagonal masked. Commands are offered back to back, so later ones wait on
// cmd_ready. Each mechanism (broadcast load, per-head load, multi-tile DBMM,
// drain stall, command wait, diagonal mask, exp, reciprocal, GELU, 1/sqrt,
// plain product, sum with ones) is counted; one that never happened counts
// as a failure.
module tb_vtr_full;
  import vtr_pkg::*;
  import ecu_ref_pkg::*;
  localparam int PH = P_H_DEF, PT = P_T_DEF, PC = P_C_DEF, P = P_PE_DEF;
  localparam int MTQ = 1;              // m-tiles on the padded token axis
  localparam int WATCHDOG = 2000000;
  localparam int ROWS = PT * P, COLS = PC * P, NB = PT * PC;
  localparam int NPAD = MTQ * ROWS;    // padded token count
  localparam int NTT  = NPAD / COLS;   // n-tiles of a token x token matrix
  localparam int DH   = COLS;          // head dimension: one n-tile
  localparam int NREAL = 12;           // real tokens, the rest is padding
  localparam int NPE = PH * PT * PC;
  localparam int AW = BUF_AW, EAW = $clog2(ECU_DEPTH);
  localparam int NW = (NPE > 1) ? $clog2(NPE) : 1;
  localparam int HW = (PH > 1) ? $clog2(PH) : 1;
  localparam int TW = (PT > 1) ? $clog2(PT) : 1;
  localparam int CW = (PC > 1) ? $clog2(PC) : 1;
  localparam int ONE = 256;            // 1.0 in Q8.8

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask

  function automatic int ref_q(input longint a);
    longint q;
    q = a >>> 8;
    if (q > 32767) q = 32767;
    if (q < -32768) q = -32768;
    return int'(q);
  endfunction

  logic cmd_valid, cmd_ready, done, hppu_stall;
  cmd_t cmd;
  logic gib_we, wb_we, gob_re, ecu_we, ecu_re;
  logic [TW-1:0] gib_bank;
  logic [AW-1:0] gib_addr, wb_addr, gob_addr;
  logic [HW-1:0] wb_head, gob_head;
  logic [CW-1:0] wb_bank;
  elem_t [P-1:0] gib_wdata, wb_wdata;
  elem_t [P-1:0][P-1:0] gob_rdata, ecu_wdata, ecu_rdata;
  ecu_buf_e ecu_wsel;
  logic [NW-1:0] ecu_wbank, ecu_rbank;
  logic [EAW-1:0] ecu_waddr, ecu_raddr;

  vtr_accel dut (.*);

  // host-side matrices, Q8.8 raw values, per head
  int MA [PH][NPAD][NPAD];   // left operand / ECU A
  int MB [PH][NPAD][NPAD];   // right operand / ECU B
  int MC [PH][NPAD][NPAD];   // ECU C
  int MR [PH][NPAD][NPAD];   // results read back
  int Qm [PH][NPAD][DH], Km [PH][NPAD][DH], Vm [PH][NPAD][DH];
  int Em [PH][NPAD][NPAD], Sm [PH][NPAD][DH], Rm [PH][NPAD];

  // mechanism counters
  int n_bcast = 0, n_perhead = 0, n_multitile = 0, n_stall = 0, n_wait = 0;
  int n_diag = 0, n_exp = 0, n_recip = 0, n_gelu = 0, n_rsqrt = 0, n_mul = 0, n_ones = 0;

  always @(posedge clk) begin
    if (hppu_stall) n_stall++;
    if (cmd_valid && !cmd_ready) n_wait++;
  end

  // offer a command and hold it until accepted (returns without waiting for
  // completion, so the next call waits on cmd_ready)
  task automatic submit(input cmd_t c);
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    @(posedge clk);
    while (!cmd_ready) @(posedge clk);
    @(negedge clk);
    cmd_valid = 0;
    if (c.op == OP_LIB_LOAD) begin
      if ($countones(c.head_mask) > 1) n_bcast++; else n_perhead++;
    end
    if (c.op == OP_DBMM && int'(c.m_tiles) * int'(c.n_tiles) > 1) n_multitile++;
    if (c.op == OP_ECU) case (c.func)
      F_EXP: n_exp++; F_RECIP: n_recip++; F_GELU: n_gelu++; F_RSQRT: n_rsqrt++; F_NONE: n_mul++;
      default: ;
    endcase
  endtask

  task automatic wait_idle();
    @(negedge clk);
    while (!cmd_ready) @(negedge clk);
  endtask

  function automatic cmd_t mk(input op_e op, input int mask, input int base, input int len,
                              input int mt, input int nt, input func_e f, input bit md);
    cmd_t c;
    c = '0;
    c.op = op; c.head_mask = 8'(mask); c.base = AW'(base); c.len = (AW+1)'(len);
    c.m_tiles = 8'(mt); c.n_tiles = 8'(nt); c.func = f; c.mask_diag = md;
    return c;
  endfunction

  // left matrix MA[h] (MT m-tiles by K) into the GIB at `base`, LIB layout:
  // bank t, word base + mt*K + k holds column k of PE row t's rows
  task automatic put_gib(input int h, input int base, input int MT, input int K);
    for (int mt = 0; mt < MT; mt++) for (int t = 0; t < PT; t++) for (int k = 0; k < K; k++) begin
      @(negedge clk);
      gib_we = 1; gib_bank = TW'(t); gib_addr = AW'(base + mt*K + k);
      for (int i = 0; i < P; i++) gib_wdata[i] = elem_t'(MA[h][(mt*PT + t)*P + i][k]);
    end
    @(negedge clk); gib_we = 0;
  endtask

  // right matrix MB[h] (K by NT n-tiles) into head h's weight buffer
  task automatic put_wb(input int h, input int NT, input int K);
    for (int nt = 0; nt < NT; nt++) for (int c = 0; c < PC; c++) for (int k = 0; k < K; k++) begin
      @(negedge clk);
      wb_we = 1; wb_head = HW'(h); wb_bank = CW'(c); wb_addr = AW'(nt*K + k);
      for (int j = 0; j < P; j++) wb_wdata[j] = elem_t'(MB[h][k][(nt*PC + c)*P + j]);
    end
    @(negedge clk); wb_we = 0;
  endtask

  // head h's GOB result (MT x NT tiles) into MR[h]
  task automatic get_gob(input int h, input int MT, input int NT);
    for (int mt = 0; mt < MT; mt++) for (int nt = 0; nt < NT; nt++)
      for (int t = 0; t < PT; t++) for (int c = 0; c < PC; c++) begin
        @(negedge clk);
        gob_re = 1; gob_head = HW'(h); gob_addr = AW'((mt*NT + nt)*NB + t*PC + c);
        @(negedge clk); gob_re = 0;
        for (int i = 0; i < P; i++) for (int j = 0; j < P; j++)
          MR[h][(mt*PT + t)*P + i][(nt*PC + c)*P + j] = int'(gob_rdata[i][j]);
      end
  endtask

  // compare MR[h] with ref_q(MA[h] * MB[h]) over rows x cols, K terms
  task automatic check_mm(input int h, input int rows, input int cols, input int K, input string tag);
    int bad;
    bad = 0;
    for (int r = 0; r < rows; r++) for (int c = 0; c < cols; c++) begin
      longint s;
      s = 0;
      for (int k = 0; k < K; k++) s += longint'(MA[h][r][k]) * longint'(MB[h][k][c]);
      if (MR[h][r][c] != ref_q(s)) bad++;
    end
    check(bad == 0, $sformatf("%s head %0d: %0d elements differ", tag, h, bad));
  endtask

  // one of MA/MB/MC of head h (MT x NT tiles) into the ECU operand buffer
  task automatic put_ecu(input ecu_buf_e sel, input int h, input int MT, input int NT);
    for (int mt = 0; mt < MT; mt++) for (int nt = 0; nt < NT; nt++)
      for (int t = 0; t < PT; t++) for (int c = 0; c < PC; c++) begin
        @(negedge clk);
        ecu_we = 1; ecu_wsel = sel; ecu_wbank = NW'((h*PT + t)*PC + c); ecu_waddr = EAW'(mt*NT + nt);
        for (int i = 0; i < P; i++) for (int j = 0; j < P; j++) begin
          int r, q;
          r = (mt*PT + t)*P + i; q = (nt*PC + c)*P + j;
          ecu_wdata[i][j] = elem_t'(sel == ECU_BUF_A ? MA[h][r][q] : sel == ECU_BUF_B ? MB[h][r][q] : MC[h][r][q]);
        end
      end
    @(negedge clk); ecu_we = 0;
  endtask

  task automatic get_ecu(input int h, input int MT, input int NT);
    for (int mt = 0; mt < MT; mt++) for (int nt = 0; nt < NT; nt++)
      for (int t = 0; t < PT; t++) for (int c = 0; c < PC; c++) begin
        @(negedge clk);
        ecu_re = 1; ecu_rbank = NW'((h*PT + t)*PC + c); ecu_raddr = EAW'(mt*NT + nt);
        @(negedge clk); ecu_re = 0;
        for (int i = 0; i < P; i++) for (int j = 0; j < P; j++)
          MR[h][(mt*PT + t)*P + i][(nt*PC + c)*P + j] = int'(ecu_rdata[i][j]);
      end
  endtask

  // all ECU operands of head h for rows x cols: ECU result within tolerance
  task automatic check_ecu(input int h, input int rows, input int cols, input func_e f, input string tag);
    int bad;
    bad = 0;
    for (int r = 0; r < rows; r++) for (int c = 0; c < cols; c++) begin
      int x;
      x = ref_x(MA[h][r][c], MB[h][r][c], MC[h][r][c]);
      if (f == F_EXP && r == c) x = -32768;
      if (!ref_ok(int'(f), x, MR[h][r][c])) bad++;
    end
    check(bad == 0, $sformatf("%s head %0d: %0d elements out of tolerance", tag, h, bad));
  endtask

  function automatic int rnd(input int range);   // uniform in [-range, range)
    return int'($urandom % (2 * range)) - range;
  endfunction

  initial begin
    real maxerr, maxerr_g;
    cmd_valid = 0; cmd = '0;
    gib_we = 0; wb_we = 0; gob_re = 0; ecu_we = 0; ecu_re = 0;
    gib_bank = '0; gib_addr = '0; wb_addr = '0; gob_addr = '0; wb_head = '0; gob_head = '0; wb_bank = '0;
    gib_wdata = '0; wb_wdata = '0; ecu_wdata = '0; ecu_wsel = ECU_BUF_A;
    ecu_wbank = '0; ecu_rbank = '0; ecu_waddr = '0; ecu_raddr = '0;
    repeat (3) @(posedge clk); rst_n = 1;

    // ---- 0: broadcast load, K = 1 outer product over two n-tiles, with
    // values large enough that some products saturate
    for (int r = 0; r < ROWS; r++) MA[0][r][0] = rnd(32768);
    for (int h = 0; h < PH; h++) for (int c = 0; c < 2*COLS; c++) MB[h][0][c] = rnd(32768);
    for (int h = 1; h < PH; h++) for (int r = 0; r < ROWS; r++) MA[h][r][0] = MA[0][r][0];
    put_gib(0, 0, 1, 1);
    for (int h = 0; h < PH; h++) put_wb(h, 2, 1);
    submit(mk(OP_LIB_LOAD, (1 << PH) - 1, 0, 1, 0, 0, F_NONE, 0));
    submit(mk(OP_DBMM, 0, 0, 1, 1, 2, F_NONE, 0));
    wait_idle();
    for (int h = 0; h < PH; h++) begin
      get_gob(h, 1, 2);
      check_mm(h, ROWS, 2*COLS, 1, "outer product");
    end

    // ---- the attention head data: Q, K in [-0.5, 0.5), V in [-1, 1);
    // padding rows are zero
    for (int h = 0; h < PH; h++) for (int r = 0; r < NPAD; r++) for (int d = 0; d < DH; d++) begin
      Qm[h][r][d] = (r < NREAL) ? rnd(128) : 0;
      Km[h][r][d] = (r < NREAL) ? rnd(128) : 0;
      Vm[h][r][d] = (r < NREAL) ? rnd(256) : 0;
    end

    // ---- 1: A = Q K^T per head
    for (int h = 0; h < PH; h++) begin
      for (int r = 0; r < NPAD; r++) for (int d = 0; d < DH; d++) begin
        MA[h][r][d] = Qm[h][r][d]; MB[h][d][r] = Km[h][r][d];
      end
      put_gib(h, h*MTQ*DH, MTQ, DH);
      put_wb(h, NTT, DH);
    end
    for (int h = 0; h < PH; h++) submit(mk(OP_LIB_LOAD, 1 << h, h*MTQ*DH, MTQ*DH, 0, 0, F_NONE, 0));
    submit(mk(OP_DBMM, 0, 0, DH, MTQ, NTT, F_NONE, 0));
    wait_idle();
    for (int h = 0; h < PH; h++) begin
      get_gob(h, MTQ, NTT);
      check_mm(h, NPAD, NPAD, DH, "Q K^T");
    end

    // ---- 2: E = exp(A / lambda + Cpad), diagonal masked; lambda = 2
    for (int h = 0; h < PH; h++) begin
      for (int r = 0; r < NPAD; r++) for (int c = 0; c < NPAD; c++) begin
        MA[h][r][c] = MR[h][r][c]; MB[h][r][c] = ONE / 2; MC[h][r][c] = (c < NREAL) ? 0 : -32768;
      end
      put_ecu(ECU_BUF_A, h, MTQ, NTT); put_ecu(ECU_BUF_B, h, MTQ, NTT); put_ecu(ECU_BUF_C, h, MTQ, NTT);
    end
    submit(mk(OP_ECU, 0, 0, 1, MTQ, NTT, F_EXP, 1));
    wait_idle();
    for (int h = 0; h < PH; h++) begin
      get_ecu(h, MTQ, NTT);
      check_ecu(h, NPAD, NPAD, F_EXP, "masked exp");
      for (int r = 0; r < NPAD; r++) begin
        if (MR[h][r][r] == 0) n_diag++;
        for (int c = 0; c < NPAD; c++) Em[h][r][c] = MR[h][r][c];
      end
    end

    // ---- 3: row sums = E * ones
    for (int h = 0; h < PH; h++) begin
      for (int r = 0; r < NPAD; r++) for (int c = 0; c < NPAD; c++) begin
        MA[h][r][c] = Em[h][r][c]; MB[h][r][c] = (c < COLS) ? ONE : 0;
      end
      put_gib(h, h*MTQ*NPAD, MTQ, NPAD);
      put_wb(h, 1, NPAD);
    end
    for (int h = 0; h < PH; h++) submit(mk(OP_LIB_LOAD, 1 << h, h*MTQ*NPAD, MTQ*NPAD, 0, 0, F_NONE, 0));
    submit(mk(OP_DBMM, 0, 0, NPAD, MTQ, 1, F_NONE, 0));
    wait_idle();
    for (int h = 0; h < PH; h++) begin
      get_gob(h, MTQ, 1);
      check_mm(h, NPAD, COLS, NPAD, "row sums");
      n_ones++;
    end

    // ---- 4a: 1/sqrt(sum) (as a layer norm would use it) and 1/sum
    for (int h = 0; h < PH; h++) begin
      for (int r = 0; r < NPAD; r++) for (int c = 0; c < COLS; c++) begin
        MA[h][r][c] = MR[h][r][c]; MB[h][r][c] = ONE; MC[h][r][c] = 0;
      end
      put_ecu(ECU_BUF_A, h, MTQ, 1); put_ecu(ECU_BUF_B, h, MTQ, 1); put_ecu(ECU_BUF_C, h, MTQ, 1);
    end
    submit(mk(OP_ECU, 0, 0, 1, MTQ, 1, F_RSQRT, 0));
    wait_idle();
    for (int h = 0; h < PH; h++) begin
      get_ecu(h, MTQ, 1);
      check_ecu(h, NREAL, COLS, F_RSQRT, "1/sqrt of row sums");
    end
    submit(mk(OP_ECU, 0, 0, 1, MTQ, 1, F_RECIP, 0));
    wait_idle();
    for (int h = 0; h < PH; h++) begin
      get_ecu(h, MTQ, 1);
      check_ecu(h, NREAL, COLS, F_RECIP, "1/row sum");
      for (int r = 0; r < NPAD; r++) Rm[h][r] = MR[h][r][0];
    end

    // ---- 4b: S = E * (1/sum), row by row
    for (int h = 0; h < PH; h++) begin
      for (int r = 0; r < NPAD; r++) for (int c = 0; c < NPAD; c++) begin
        MA[h][r][c] = Em[h][r][c]; MB[h][r][c] = Rm[h][r]; MC[h][r][c] = 0;
      end
      put_ecu(ECU_BUF_A, h, MTQ, NTT); put_ecu(ECU_BUF_B, h, MTQ, NTT); put_ecu(ECU_BUF_C, h, MTQ, NTT);
    end
    submit(mk(OP_ECU, 0, 0, 1, MTQ, NTT, F_NONE, 0));
    wait_idle();
    for (int h = 0; h < PH; h++) begin
      get_ecu(h, MTQ, NTT);
      check_ecu(h, NPAD, NPAD, F_NONE, "softmax normalisation");
    end

    // ---- 5: O = S V
    for (int h = 0; h < PH; h++) begin
      for (int r = 0; r < NPAD; r++) for (int c = 0; c < NPAD; c++) MA[h][r][c] = MR[h][r][c];
      for (int r = 0; r < NPAD; r++) for (int c = 0; c < NPAD; c++) MB[h][r][c] = (c < DH) ? Vm[h][r][c] : 0;
      put_gib(h, h*MTQ*NPAD, MTQ, NPAD);
      put_wb(h, 1, NPAD);
    end
    for (int h = 0; h < PH; h++) submit(mk(OP_LIB_LOAD, 1 << h, h*MTQ*NPAD, MTQ*NPAD, 0, 0, F_NONE, 0));
    submit(mk(OP_DBMM, 0, 0, NPAD, MTQ, 1, F_NONE, 0));
    wait_idle();
    maxerr = 0.0;
    for (int h = 0; h < PH; h++) begin
      get_gob(h, MTQ, 1);
      check_mm(h, NPAD, DH, NPAD, "S V");
      // against real-valued attention with the diagonal masked
      for (int r = 0; r < NREAL; r++) begin
        real sc [NPAD];
        real den, o, err;
        den = 0.0;
        for (int c = 0; c < NREAL; c++) begin
          real d;
          d = 0.0;
          for (int k = 0; k < DH; k++) d += real'(Qm[h][r][k]) * real'(Km[h][c][k]) / 65536.0;
          sc[c] = (c == r) ? 0.0 : $exp(d / 2.0);
          den += sc[c];
        end
        for (int k = 0; k < DH; k++) begin
          o = 0.0;
          for (int c = 0; c < NREAL; c++) o += sc[c] / den * real'(Vm[h][c][k]) / 256.0;
          err = real'(MR[h][r][k]) / 256.0 - o;
          if (err < 0) err = -err;
          if (err > maxerr) maxerr = err;
          Sm[h][r][k] = MR[h][r][k];
        end
      end
    end
    $display("attention output: largest error against real arithmetic %f", maxerr);
    check(maxerr < 0.06, $sformatf("attention output error %f", maxerr));

    // ---- 6: GELU of the attention output
    for (int h = 0; h < PH; h++) begin
      for (int r = 0; r < NPAD; r++) for (int c = 0; c < COLS; c++) begin
        MA[h][r][c] = Sm[h][r][c]; MB[h][r][c] = ONE; MC[h][r][c] = 0;
      end
      put_ecu(ECU_BUF_A, h, MTQ, 1); put_ecu(ECU_BUF_B, h, MTQ, 1); put_ecu(ECU_BUF_C, h, MTQ, 1);
    end
    submit(mk(OP_ECU, 0, 0, 1, MTQ, 1, F_GELU, 0));
    wait_idle();
    for (int h = 0; h < PH; h++) begin
      get_ecu(h, MTQ, 1);
      check_ecu(h, NREAL, COLS, F_GELU, "GELU");
    end

    $display("mechanisms: bcast=%0d perhead=%0d multitile=%0d stall=%0d wait=%0d diag=%0d",
             n_bcast, n_perhead, n_multitile, n_stall, n_wait, n_diag);
    $display("            exp=%0d recip=%0d rsqrt=%0d gelu=%0d mul=%0d ones=%0d",
             n_exp, n_recip, n_rsqrt, n_gelu, n_mul, n_ones);
    check(n_bcast > 0, "no broadcast LIB load");
    check(n_perhead > 0, "no per-head LIB load");
    check(n_multitile > 0, "no multi-tile DBMM");
    check(n_stall > 0, "no drain stall");
    check(n_wait > 0, "no command waited on cmd_ready");
    check(n_diag >= PH * NPAD, "diagonal mask not applied everywhere");
    check(n_exp > 0 && n_recip > 0 && n_rsqrt > 0 && n_gelu > 0 && n_mul > 0, "an ECU function never ran");
    check(n_ones > 0, "no sum with ones");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
