// tb_posit_alu: self-checking testbench of posit_alu.
//
// Compares the comparisons and MIN/MAX with the ordering of the real values
// of the operands (NaR taken as below everything and equal to itself), for
// random posits including zero, NaR, maxpos and minpos.
module tb_posit_alu;
  import posit_ref_pkg::*;
  import coprosit_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  alu_op_e     op;
  logic [15:0] a, b;
  logic [31:0] y, exp_y;

  posit_alu #(.N(16)) dut (.op(op), .a(a), .b(b), .result(y));

  task automatic check(string what);
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL %s a=%h b=%h got=%h exp=%h", what, a, b, y, exp_y);
    end
  endtask

  function automatic bit less(logic [15:0] u, logic [15:0] v);
    if (is_nar(u)) return !is_nar(v);
    if (is_nar(v)) return 0;
    return to_real(17'(u), 16) < to_real(17'(v), 16);
  endfunction

  initial begin
    op = ALU_EQ; a = 0; b = 0;
    for (int i = 0; i < 5000; i++) begin
      a = rand_posit(); b = ($urandom_range(0, 7) == 0) ? a : rand_posit();
      op = ALU_EQ;  @(posedge clk); exp_y = 32'(a == b);                check("eq");
      op = ALU_LT;  @(posedge clk); exp_y = 32'(less(a, b));            check("lt");
      op = ALU_LE;  @(posedge clk); exp_y = 32'(!less(b, a));           check("le");
      op = ALU_MIN; @(posedge clk); exp_y = {16'h0, less(b, a) ? b : a}; check("min");
      op = ALU_MAX; @(posedge clk); exp_y = {16'h0, less(a, b) ? b : a}; check("max");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
