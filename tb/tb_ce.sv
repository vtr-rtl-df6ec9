// tb_ce: self-checking test of one compute element.
// Drives random operand pairs with random valid/first/last flags and checks
// the accumulator against a sum kept in the testbench, plus the one-cycle
// forwarding of operands and flags.
module tb_ce;
  import vtr_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  elem_t a_in, b_in, a_out, b_out;
  logic v_in, first_in, last_in, v_out, first_out, last_out;
  acc_t acc;

  ce dut (.*);

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

  longint ref_acc;
  initial begin
    a_in = '0; b_in = '0; v_in = 0; first_in = 0; last_in = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    ref_acc = 0;
    for (int n = 0; n < 500; n++) begin
      @(negedge clk);
      a_in = elem_t'($urandom); b_in = elem_t'($urandom);
      v_in = ($urandom % 4) != 0; first_in = ($urandom % 6) == 0; last_in = ($urandom % 5) == 0;
      if (v_in) ref_acc = (first_in ? 0 : ref_acc) + longint'(a_in) * longint'(b_in);
      @(posedge clk); #1;
      check(acc == acc_t'(ref_acc), $sformatf("acc %0d expected %0d", acc, ref_acc));
      check(a_out == a_in && b_out == b_in && v_out == v_in &&
            first_out == (first_in & v_in) && last_out == (last_in & v_in), "forwarding");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
