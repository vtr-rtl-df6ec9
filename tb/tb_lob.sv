// tb_lob: self-checking test of the local output buffer at its default size.
// Captures random accumulators (some far out of the Q8.8 range, so the
// saturation is exercised), then checks the stream: P_T*P_C blocks on
// consecutive cycles starting the cycle after the capture, consecutive GOB
// addresses from `base`, block n = PE (n / P_C, n % P_C), each element
// floor(acc / 2^8) clipped to [-32768, 32767]. Done twice with different
// bases; `busy` must last exactly P_T*P_C cycles.
module tb_lob;
  import vtr_pkg::*;
  localparam int PT = P_T_DEF, PC = P_C_DEF, P = P_PE_DEF, NB = PT * PC;
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
  logic capture, out_valid, busy;
  logic [BUF_AW-1:0] base, out_addr;
  acc_t [PT-1:0][PC-1:0][P-1:0][P-1:0] acc;
  elem_t [P-1:0][P-1:0] out_block;
  lob dut (.*);

  function automatic int ref_q(input longint a);
    longint q;
    q = a >>> 8;
    if (q > 32767) q = 32767;
    if (q < -32768) q = -32768;
    return int'(q);
  endfunction

  int sat_hi = 0, sat_lo = 0;
  initial begin
    capture = 0; base = '0; acc = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int rep = 0; rep < 2; rep++) begin
      @(negedge clk);
      for (int t = 0; t < PT; t++) for (int c = 0; c < PC; c++)
        for (int i = 0; i < P; i++) for (int j = 0; j < P; j++) begin
          longint v;
          case ($urandom % 4)
            0: v = longint'($signed($urandom)) * 64;        // often saturates
            default: v = longint'($signed($urandom)) >>> 8;  // in range
          endcase
          acc[t][c][i][j] = acc_t'(v);
          if (ref_q(v) == 32767) sat_hi++;
          if (ref_q(v) == -32768) sat_lo++;
        end
      capture = 1; base = BUF_AW'(rep * 1000 + 7);
      @(negedge clk); capture = 0;
      for (int n = 0; n < NB; n++) begin
        int bad;
        bad = 0;
        check(out_valid && busy, $sformatf("valid at block %0d", n));
        check(out_addr == BUF_AW'(rep * 1000 + 7 + n), $sformatf("address of block %0d", n));
        for (int i = 0; i < P; i++) for (int j = 0; j < P; j++)
          if (int'(out_block[i][j]) != ref_q(longint'(acc[n / PC][n % PC][i][j]))) bad++;
        check(bad == 0, $sformatf("block %0d: %0d wrong elements", n, bad));
        @(negedge clk);
      end
      check(!out_valid && !busy, "stream ends after P_T*P_C blocks");
    end
    check(sat_hi > 0 && sat_lo > 0, "saturation exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
