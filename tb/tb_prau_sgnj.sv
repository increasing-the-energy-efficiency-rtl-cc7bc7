// tb_prau_sgnj: self-checking testbench of prau_sgnj.
//
// For random posits (with zero, NaR and extremes) the reference negates
// through the real value: sign injection must give |a| with the wanted sign,
// computed as from_real(+-|value(a)|); NaR must stay NaR. The moves are
// checked against sign extension and truncation written out directly.
module tb_prau_sgnj;
  import posit_ref_pkg::*;
  import coprosit_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  prau_op_e    op;
  logic [15:0] a, b;
  logic [31:0] x, y, exp_y;

  prau_sgnj #(.N(16)) dut (.op(op), .a(a), .b(b), .int_in(x), .result(y));

  task automatic check(string what);
    checks++;
    if (y !== exp_y) begin
      failures++;
      if (failures < 10) $display("FAIL %s a=%h b=%h got=%h exp=%h", what, a, b, y, exp_y);
    end
  endtask

  function automatic logic [15:0] with_sign(logic [15:0] v, bit s);
    real r;
    if (is_nar(v)) return v;
    r = to_real(17'(v), 16);
    if (r < 0.0) r = -r;
    return from_real(s ? -r : r);
  endfunction

  initial begin
    op = PRAU_SGNJ; a = 0; b = 0; x = 0;
    for (int i = 0; i < 5000; i++) begin
      a = rand_posit(); b = rand_posit(); x = $urandom;
      op = PRAU_SGNJ;  @(posedge clk); exp_y = {16'h0, with_sign(a, b[15])};         check("sgnj");
      op = PRAU_SGNJN; @(posedge clk); exp_y = {16'h0, with_sign(a, !b[15])};        check("sgnjn");
      op = PRAU_SGNJX; @(posedge clk); exp_y = {16'h0, with_sign(a, a[15] ^ b[15])}; check("sgnjx");
      op = PRAU_MVXP;  @(posedge clk); exp_y = $unsigned(32'($signed(a)));           check("mvxp");
      op = PRAU_MVPX;  @(posedge clk); exp_y = {16'h0, x[15:0]};                     check("mvpx");
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
