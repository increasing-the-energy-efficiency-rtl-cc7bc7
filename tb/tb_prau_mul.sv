// tb_prau_mul: self-checking testbench of prau_mul.
//
// Drives 20000 operand sets (directed corner cases, then random posits with
// extra weight on zero, NaR, maxpos and minpos) and compares every result
// with the real-number reference model in posit_ref_pkg, which rounds as the
// posit standard defines. One vector per clock cycle; a watchdog ends the
// run if it does not finish in time.
module tb_prau_mul;
  import posit_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [15:0] a, b, y, exp_y;
  logic        sub;
  prau_mul #(.N(16)) dut (.a(a), .b(b), .result(y));
  task automatic check(string what);
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL %s a=%h b=%h got=%h exp=%h", what, a, b, y, exp_y);
    end
  endtask

  initial begin
    a = 0; b = 0; sub = 0;
    a = from_real(1.5); b = from_real(-2.0); @(posedge clk); exp_y = from_real(-3.0); check("1.5*-2");
    a = 16'h7fff; b = 16'h7fff; @(posedge clk); exp_y = 16'h7fff; check("maxpos^2");
    a = 16'h0001; b = 16'h0001; @(posedge clk); exp_y = 16'h0001; check("minpos^2");
    for (int i = 0; i < 20000; i++) begin
      a = rand_posit(); b = rand_posit();
      @(posedge clk);
      exp_y = ref_mul(a, b);
      check("mul");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000 + 1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
