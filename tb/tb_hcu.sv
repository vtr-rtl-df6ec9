// tb_hcu: self-checking test of one head compute unit (reduced to a 2 x 2
// grid of 4 x 4 PEs to keep it short). Loads a random A row-block set into
// the LIB, streams K vectors with the matching B rows (delivered one cycle
// after the read, as the weight buffer does), waits for pe_done, captures,
// and checks the LOB stream against A*B re-quantised to Q8.8. Two tiles with
// different K, the second starting right after the first capture so its
// compute overlaps the first tile's stream.
module tb_hcu;
  import vtr_pkg::*;
  localparam int PT = 2, PC = 2, P = 4, D = 64, AW = 6;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  initial begin : watchdog
    repeat (5000) @(posedge clk);
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
  logic lib_we, rd_en, first, last, pe_done, capture, out_valid, lob_busy;
  logic [AW-1:0] lib_waddr, lib_raddr, gob_base, out_addr;
  elem_t [PT-1:0][P-1:0] lib_wdata;
  elem_t [PC-1:0][P-1:0] b_vec, b_next;
  elem_t [P-1:0][P-1:0] out_block;

  hcu #(.P_T(PT), .P_C(PC), .P_PE(P), .DEPTH(D)) dut (.*);

  elem_t A [2][PT*P][16];
  elem_t B [2][16][PC*P];
  int KS [2] = '{7, 3};
  int got [2][PT*PC];   // blocks received per tile, bad elements
  int nrecv [2];

  always_ff @(posedge clk) b_vec <= b_next;

  // collect the stream: address gob_base + n, tile from the address
  always @(posedge clk) if (rst_n && out_valid) begin
    int tl, n, bad;
    tl = (out_addr >= 6'd32) ? 1 : 0;
    n  = int'(out_addr) - tl * 32;
    bad = 0;
    for (int i = 0; i < P; i++) for (int j = 0; j < P; j++) begin
      longint s;
      s = 0;
      for (int k = 0; k < KS[tl]; k++)
        s += longint'(A[tl][(n / PC)*P + i][k]) * longint'(B[tl][k][(n % PC)*P + j]);
      if (int'(out_block[i][j]) != ref_q(s)) bad++;
    end
    got[tl][n] = bad;
    nrecv[tl]++;
  end

  initial begin
    lib_we = 0; rd_en = 0; first = 0; last = 0; capture = 0; lib_waddr = '0; lib_raddr = '0;
    gob_base = '0; lib_wdata = '0; b_next = '0; nrecv = '{0, 0};
    for (int tl = 0; tl < 2; tl++) for (int n = 0; n < PT*PC; n++) got[tl][n] = -1;
    repeat (2) @(posedge clk); rst_n = 1;
    // both tiles' A go to LIB at addresses tl*16 + k
    for (int tl = 0; tl < 2; tl++)
      for (int k = 0; k < KS[tl]; k++) begin
        @(negedge clk);
        lib_we = 1; lib_waddr = AW'(tl * 16 + k);
        for (int r = 0; r < PT*P; r++) begin
          A[tl][r][k] = elem_t'($signed($urandom) >>> 20);
          lib_wdata[r / P][r % P] = A[tl][r][k];
        end
        for (int col = 0; col < PC*P; col++) B[tl][k][col] = elem_t'($signed($urandom) >>> 20);
      end
    @(negedge clk); lib_we = 0;
    for (int tl = 0; tl < 2; tl++) begin
      for (int k = 0; k < KS[tl]; k++) begin
        rd_en = 1; lib_raddr = AW'(tl * 16 + k); first = (k == 0); last = (k == KS[tl]-1);
        for (int col = 0; col < PC*P; col++) b_next[col / P][col % P] = B[tl][k][col];
        @(negedge clk);
      end
      rd_en = 0; first = 0; last = 0;
      while (!pe_done) @(negedge clk);
      while (lob_busy) @(negedge clk);
      capture = 1; gob_base = AW'(tl * 32);
      @(negedge clk); capture = 0;
    end
    while (lob_busy) @(negedge clk);
    repeat (2) @(negedge clk);
    for (int tl = 0; tl < 2; tl++) begin
      check(nrecv[tl] == PT*PC, $sformatf("tile %0d: %0d blocks streamed", tl, nrecv[tl]));
      for (int n = 0; n < PT*PC; n++)
        check(got[tl][n] == 0, $sformatf("tile %0d block %0d: %0d bad elements", tl, n, got[tl][n]));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
