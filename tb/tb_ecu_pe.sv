// tb_ecu_pe: self-checking test of the element-wise PE at its default size.
// For each function (identity, GELU, exp, reciprocal, 1/sqrt) it applies
// random blocks A, B, C and compares y = f(A*B + C) with a real-arithmetic
// reference (3 LSB or 1.5 % tolerance; the multiply-add is checked exactly
// through identity). Then checks the diagonal mask: with mask_en the
// diagonal becomes exp(-128) = 0 while the rest is unchanged. Also checks
// the one-cycle latency of v_out.
module tb_ecu_pe;
  import vtr_pkg::*;
  localparam int P = P_PE_DEF;
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
  import ecu_ref_pkg::*;

  logic v_in, v_out, mask_en;
  func_e func;
  elem_t [P-1:0][P-1:0] a, b, c, y;
  ecu_pe dut (.*);

  initial begin
    v_in = 0; mask_en = 0; func = F_NONE; a = '0; b = '0; c = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int f = 0; f < 5; f++)
      for (int rep = 0; rep < 6; rep++) begin
        int bad;
        bad = 0;
        @(negedge clk);
        func = func_e'(f); v_in = 1; mask_en = 0;
        for (int i = 0; i < P; i++) for (int j = 0; j < P; j++) begin
          a[i][j] = elem_t'($signed($urandom) >>> 20);        // +-8
          b[i][j] = (rep < 3) ? elem_t'(256) : elem_t'($signed($urandom) >>> 22);
          c[i][j] = elem_t'($signed($urandom) >>> 21);        // +-4
          if (f == 2) c[i][j] = elem_t'(int'(c[i][j]) - 512);   // keep exp mostly in range
        end
        @(negedge clk); v_in = 0;
        check(v_out, "v_out one cycle after v_in");
        for (int i = 0; i < P; i++) for (int j = 0; j < P; j++) begin
          int xi;
          xi = ref_x(int'(a[i][j]), int'(b[i][j]), int'(c[i][j]));
          if (f == 0) begin
            if (int'(y[i][j]) != xi) bad++;
          end else if (!ref_ok(f, xi, int'(y[i][j]))) begin
            bad++;
            if (bad < 3) $display("f=%0d x=%0d y=%0d ref=%f", f, xi, y[i][j], ref_f(f, xi));
          end
        end
        check(bad == 0, $sformatf("func %0d rep %0d: %0d bad elements", f, rep, bad));
      end
    // diagonal mask with exp
    @(negedge clk);
    func = F_EXP; v_in = 1; mask_en = 1;
    for (int i = 0; i < P; i++) for (int j = 0; j < P; j++) begin
      a[i][j] = elem_t'(($urandom % 512) + 256); b[i][j] = elem_t'(256); c[i][j] = '0;
    end
    @(negedge clk); v_in = 0;
    begin
      int bad;
      bad = 0;
      for (int i = 0; i < P; i++) for (int j = 0; j < P; j++)
        if (i == j) begin if (y[i][j] != '0) bad++; end
        else if (!ref_ok(2, int'(a[i][j]), int'(y[i][j]))) bad++;
      check(bad == 0, $sformatf("diagonal mask: %0d bad", bad));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
