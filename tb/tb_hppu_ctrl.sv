// tb_hppu_ctrl: self-checking test of the HPPU controller at its default
// size, with the PEs and LOBs replaced by simple models (pe_done a fixed
// time after the last vector, lob_busy for P_T*P_C cycles after a capture).
// Checks the GIB->LIB load sequence and head mask, the DBMM read address
// sequence (m_tile outer, n_tile inner), first/last flags, capture bases,
// the stall while the LOB drains, the done pulse and the cycle counts.
module tb_hppu_ctrl;
  import vtr_pkg::*;
  localparam int PH = P_H_DEF, PT = P_T_DEF, PC = P_C_DEF, NB = PT * PC, AW = BUF_AW;
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
  logic start, busy, done, gib_re, rd_en, first, last, pe_done, lob_busy, capture, stall;
  cmd_t cmd;
  logic [AW-1:0] gib_raddr, lib_waddr, lib_raddr, wb_raddr, gob_base;
  logic [PH-1:0] lib_we;

  hppu_ctrl dut (.*);

  // PE / LOB models
  int pe_cnt = -1, lob_cnt = 0;
  always_ff @(posedge clk) begin
    if (rd_en && last) pe_cnt <= 6;
    else if (pe_cnt >= 0) pe_cnt <= pe_cnt - 1;
    if (capture) lob_cnt <= NB;
    else if (lob_cnt > 0) lob_cnt <= lob_cnt - 1;
  end
  always_comb pe_done = (pe_cnt == 0);
  always_comb lob_busy = (lob_cnt > 0);

  // recorders
  int n_rd, n_cap, n_stall, n_gib, n_lib, bad_seq;
  int exp_gib, exp_lib;
  longint cyc = 0;
  always @(posedge clk) cyc++;

  task automatic issue(input cmd_t c);
    @(negedge clk); cmd = c; start = 1;
    @(negedge clk); start = 0;
  endtask

  initial begin
    cmd_t c;
    longint t0;
    int K, MT, NT, mt, nt, k;
    start = 0; cmd = '0;
    n_rd = 0; n_cap = 0; n_stall = 0; n_gib = 0; n_lib = 0; bad_seq = 0;
    repeat (2) @(posedge clk); rst_n = 1;

    // ---------------- LIB load ----------------
    c = '0; c.op = OP_LIB_LOAD; c.base = AW'(100); c.len = (AW+1)'(5); c.head_mask = 8'b0101;
    exp_gib = 100; exp_lib = 0;
    t0 = cyc;
    issue(c);
    forever begin
      if (gib_re) begin
        if (gib_raddr != AW'(exp_gib)) bad_seq++;
        exp_gib++; n_gib++;
      end
      if (lib_we != '0) begin
        if (lib_we != PH'(4'b0101) || lib_waddr != AW'(exp_lib)) bad_seq++;
        exp_lib++; n_lib++;
      end
      if (done) break;
      @(negedge clk);
    end
    check(n_gib == 5 && n_lib == 5 && bad_seq == 0, $sformatf("LIB load: %0d reads %0d writes %0d bad", n_gib, n_lib, bad_seq));
    check(cyc - t0 == 5 + 3, $sformatf("LIB load took %0d cycles", cyc - t0));
    @(negedge clk);
    check(!busy, "idle after load");

    // ---------------- DBMM ----------------
    K = 4; MT = 2; NT = 3; mt = 0; nt = 0; k = 0; bad_seq = 0;
    c = '0; c.op = OP_DBMM; c.len = (AW+1)'(K); c.m_tiles = 8'(MT); c.n_tiles = 8'(NT);
    issue(c);
    forever begin
      if (stall) n_stall++;
      if (rd_en) begin
        if (lib_raddr != AW'(mt*K + k) || wb_raddr != AW'(nt*K + k) ||
            first != (k == 0) || last != (k == K-1)) bad_seq++;
        n_rd++;
        k++;
        if (k == K) begin
          k = 0; nt++;
          if (nt == NT) begin nt = 0; mt++; end
        end
      end
      if (capture) begin
        if (gob_base != AW'(n_cap * NB)) bad_seq++;
        if (lob_busy) bad_seq++;
        n_cap++;
      end
      if (done && lob_busy) bad_seq++;
      if (done) break;
      @(negedge clk);
    end
    check(n_rd == MT*NT*K, $sformatf("DBMM issued %0d reads", n_rd));
    check(n_cap == MT*NT, $sformatf("DBMM captured %0d tiles", n_cap));
    check(bad_seq == 0, $sformatf("DBMM sequence errors: %0d", bad_seq));
    check(n_stall > 0, "LOB drain stall happened");

    // ---------------- empty command ----------------
    c = '0; c.op = OP_DBMM; c.len = '0; c.m_tiles = 8'd1; c.n_tiles = 8'd1;
    issue(c);
    check(done, "zero-length command finishes at once");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
