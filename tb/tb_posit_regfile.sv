// tb_posit_regfile: self-checking testbench of posit_regfile.
//
// Random writes on both write ports (sometimes to the same register) and
// random reads on both read ports, compared every cycle with an array model
// in which the execution port is applied after the memory port. Also checks
// that reset clears all registers.
module tb_posit_regfile;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [4:0]  ra, rb, wa_ex, wa_mem;
  logic [15:0] da, db, wd_ex, wd_mem;
  logic        we_ex, we_mem;
  logic [15:0] model [32];

  posit_regfile #(.NUM_REGS(32), .N(16)) dut (
    .clk_i(clk), .rst_ni(rst_n), .raddr_a_i(ra), .rdata_a_o(da), .raddr_b_i(rb), .rdata_b_o(db),
    .we_ex_i(we_ex), .waddr_ex_i(wa_ex), .wdata_ex_i(wd_ex),
    .we_mem_i(we_mem), .waddr_mem_i(wa_mem), .wdata_mem_i(wd_mem));

  task automatic check(logic [15:0] got, logic [15:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got=%h exp=%h", what, got, exp);
    end
  endtask

  initial begin
    we_ex = 0; we_mem = 0; ra = 0; rb = 0; wa_ex = 0; wa_mem = 0; wd_ex = 0; wd_mem = 0;
    for (int i = 0; i < 32; i++) model[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 32; i++) begin
      ra = 5'(i); rb = 5'(31 - i); #1;
      check(da, 16'h0, "reset a"); check(db, 16'h0, "reset b");
    end
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      we_ex  = 1'($urandom_range(0, 1)); wa_ex  = 5'($urandom); wd_ex  = 16'($urandom);
      we_mem = 1'($urandom_range(0, 1)); wa_mem = ($urandom_range(0, 3) == 0) ? wa_ex : 5'($urandom);
      wd_mem = 16'($urandom);
      ra = 5'($urandom); rb = 5'($urandom);
      #1;
      check(da, model[ra], "read a"); check(db, model[rb], "read b");
      @(posedge clk);
      if (we_mem) model[wa_mem] = wd_mem;
      if (we_ex)  model[wa_ex]  = wd_ex;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
