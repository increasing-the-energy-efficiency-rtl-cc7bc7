// tb_prau_sqrt: self-checking testbench of prau_sqrt.
//
// Drives 65540 operand sets (directed corner cases, then random posits with
// extra weight on zero, NaR, maxpos and minpos) and compares every result
// with the real-number reference model in posit_ref_pkg, which rounds as the
// posit standard defines. One vector per clock cycle; a watchdog ends the
// run if it does not finish in time.
module tb_prau_sqrt;
  import posit_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [15:0] a, b, y, exp_y;
  logic        sub;
  prau_sqrt #(.N(16)) dut (.a(a), .result(y));
  task automatic check(string what);
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL %s a=%h b=%h got=%h exp=%h", what, a, b, y, exp_y);
    end
  endtask

  initial begin
    a = 0; b = 0; sub = 0;
    a = from_real(2.0); @(posedge clk); exp_y = from_real($sqrt(2.0)); check("sqrt2");
    a = from_real(-4.0); @(posedge clk); exp_y = 16'h8000; check("sqrt-4");
    // exhaustive over all 65536 encodings
    for (int i = 0; i < 65536; i++) begin
      a = 16'(i);
      @(posedge clk);
      exp_y = ref_sqrt(a);
      check("sqrt");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (65540 + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
