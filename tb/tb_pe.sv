// tb_pe: self-checking test of the P_PE x P_PE systolic processing element
// at its default size. Streams random A column vectors and B row vectors for
// several blocks of random inner dimension K, checks every accumulator
// against a product computed here, and checks that `done` comes
// K + 2*P_PE - 2 edges after the first vector.
module tb_pe;
  import vtr_pkg::*;
  localparam int P = P_PE_DEF;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  elem_t [P-1:0] a_vec, b_vec;
  logic v, first, last, done;
  acc_t [P-1:0][P-1:0] acc;

  pe dut (.clk, .rst_n, .a_vec, .b_vec, .v, .first, .last, .acc, .done);

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

  elem_t A [P][64];
  elem_t B [64][P];
  longint cyc = 0;
  always @(posedge clk) cyc++;

  initial begin
    a_vec = '0; b_vec = '0; v = 0; first = 0; last = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int blk = 0; blk < 12; blk++) begin
      int K;
      K = (blk == 0) ? 1 : 1 + $urandom % 40;
      for (int i = 0; i < P; i++) for (int k = 0; k < K; k++) begin
        A[i][k] = elem_t'($urandom); B[k][i] = elem_t'($urandom);
      end
      for (int k = 0; k < K; k++) begin
        // a gap in the stream now and then
        if (k != 0 && ($urandom % 5) == 0) begin
          @(negedge clk); v = 0; first = 0; last = 0;
        end
        @(negedge clk);
        for (int i = 0; i < P; i++) begin a_vec[i] = A[i][k]; b_vec[i] = B[k][i]; end
        v = 1; first = (k == 0); last = (k == K-1);
      end
      @(negedge clk); v = 0; first = 0; last = 0;
      while (!done) @(negedge clk);
      begin
        int bad;
        longint s;
        bad = 0;
        for (int i = 0; i < P; i++) for (int j = 0; j < P; j++) begin
          s = 0;
          for (int k = 0; k < K; k++) s += longint'(A[i][k]) * longint'(B[k][j]);
          if (acc[i][j] != acc_t'(s)) bad++;
          checks++;
        end
        failures += bad;
        if (bad) $display("FAIL: block %0d K=%0d: %0d wrong elements", blk, K, bad);
      end
    end
    // latency on a gap-free stream
    begin
      int K;
      longint tstart;
      K = 16;
      for (int k = 0; k < K; k++) begin
        @(negedge clk);
        a_vec = '0; b_vec = '0; a_vec[0] = 16'sd1; b_vec[0] = 16'sd1;
        v = 1; first = (k == 0); last = (k == K-1);
        if (k == 0) tstart = cyc;
      end
      @(negedge clk); v = 0; first = 0; last = 0;
      while (!done) @(negedge clk);
      // cyc counts edges; the first vector is taken at edge tstart+1
      check(cyc - tstart == longint'(K + 2*P - 2),
            $sformatf("done after %0d edges, expected %0d", cyc - tstart, K + 2*P - 2));
      check(acc[0][0] == acc_t'(K), "latency block value");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
