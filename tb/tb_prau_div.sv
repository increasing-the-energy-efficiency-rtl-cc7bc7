// tb_prau_div: self-checking testbench of prau_div.
//
// Drives 20000 operand sets (directed corner cases, then random posits with
// extra weight on zero, NaR, maxpos and minpos) and compares every result
// with the real-number reference model in posit_ref_pkg, which rounds as the
// posit standard defines. One vector per clock cycle; a watchdog ends the
// run if it does not finish in time.
module tb_prau_div;
  import posit_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [15:0] a, b, y, exp_y;
  logic        sub;
  prau_div #(.N(16)) dut (.a(a), .b(b), .result(y));
  task automatic check(string what);
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL %s a=%h b=%h got=%h exp=%h", what, a, b, y, exp_y);
    end
  endtask

  initial begin
    a = 0; b = 0; sub = 0;
    a = from_real(1.0); b = from_real(3.0); @(posedge clk); exp_y = from_real(1.0/3.0); check("1/3");
    a = from_real(5.0); b = 16'h0000; @(posedge clk); exp_y = 16'h8000; check("x/0");
    a = 16'h0000; b = from_real(7.0); @(posedge clk); exp_y = 16'h0000; check("0/x");
    for (int i = 0; i < 20000; i++) begin
      a = rand_posit(); b = rand_posit();
      @(posedge clk);
      exp_y = ref_div(a, b);
      check("div");
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
