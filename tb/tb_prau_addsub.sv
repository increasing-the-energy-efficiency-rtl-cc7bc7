// tb_prau_addsub: self-checking testbench of prau_addsub.
//
// Drives 20000 operand sets (directed corner cases, then random posits with
// extra weight on zero, NaR, maxpos and minpos) and compares every result
// with the real-number reference model in posit_ref_pkg, which rounds as the
// posit standard defines. One vector per clock cycle; a watchdog ends the
// run if it does not finish in time.
module tb_prau_addsub;
  import posit_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [15:0] a, b, y, exp_y;
  logic        sub;
  prau_addsub #(.N(16)) dut (.a(a), .b(b), .sub(sub), .result(y));
  task automatic check(string what);
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL %s a=%h b=%h got=%h exp=%h", what, a, b, y, exp_y);
    end
  endtask

  initial begin
    a = 0; b = 0; sub = 0;
    // paper example: 1001101000111000 = -46.25; -46.25 + 46.25 = 0
    a = 16'b1001101000111000; b = from_real(46.25); sub = 0; @(posedge clk); exp_y = 16'h0000; check("example");
    a = from_real(-46.25); b = 16'h0000; @(posedge clk); exp_y = 16'b1001101000111000; check("example-encode");
    a = 16'h7fff; b = 16'h0001; @(posedge clk); exp_y = 16'h7fff; check("maxpos+minpos");
    a = 16'h0001; b = 16'h0001; sub = 1; @(posedge clk); exp_y = 16'h0000; check("x-x");
    for (int i = 0; i < 20000; i++) begin
      a = rand_posit(); b = rand_posit(); sub = 1'($urandom_range(0, 1));
      @(posedge clk);
      exp_y = ref_add(a, sub ? neg(b) : b);
      check(sub ? "sub" : "add");
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
