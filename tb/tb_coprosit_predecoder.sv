// tb_coprosit_predecoder: self-checking testbench of coprosit_predecoder.
//
// Builds instruction words field by field (every opcode class, funct5,
// funct3 and rs2 value that matters, with random register fields) plus fully
// random words, and compares accept/writeback/loadstore/use_xrs1 with an
// expectation written as a plain case analysis of the encoding.
module tb_coprosit_predecoder;
  import coprosit_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [31:0] instr;
  logic acc, wb, ls, ux;

  coprosit_predecoder dut (.instr_i(instr), .accept_o(acc), .writeback_o(wb), .loadstore_o(ls), .use_xrs1_o(ux));

  function automatic logic [3:0] expect_of(logic [31:0] w);   // {accept, writeback, loadstore, use_xrs1}
    logic [4:0] f5, rs2;
    logic [2:0] f3;
    f5 = w[31:27]; f3 = w[14:12]; rs2 = w[24:20];
    if (w[6:0] == 7'b0001011) return (f3 == 3'b001) ? 4'b1011 : 4'b0;
    if (w[6:0] == 7'b0101011) return (f3 == 3'b001) ? 4'b1011 : 4'b0;
    if (w[6:0] != 7'b1011011) return 4'b0;
    case (f5)
      5'b00000, 5'b00001, 5'b00010, 5'b00011: return 4'b1000;
      5'b01011: return (rs2 == 0) ? 4'b1000 : 4'b0;
      5'b00100: return (f3 <= 2) ? 4'b1000 : 4'b0;
      5'b00101: return (f3 <= 1) ? 4'b1000 : 4'b0;
      5'b10100: return (f3 <= 2) ? 4'b1100 : 4'b0;
      5'b11000: return (rs2 <= 1) ? 4'b1100 : 4'b0;
      5'b11010: return (rs2 <= 1) ? 4'b1001 : 4'b0;
      5'b11100: return (f3 == 0) ? 4'b1100 : 4'b0;
      5'b11110: return (f3 == 0) ? 4'b1001 : 4'b0;
      default:  return 4'b0;
    endcase
  endfunction

  initial begin
    logic [6:0] opcs[4] = '{7'b0001011, 7'b0101011, 7'b1011011, 7'b0110011};
    instr = 0;
    for (int i = 0; i < 20000; i++) begin
      if (i % 4 == 3) instr = $urandom;
      else begin
        instr = $urandom;
        instr[6:0] = opcs[$urandom_range(0, 3)];
        if ($urandom_range(0, 1)) instr[24:20] = 5'($urandom_range(0, 2));
        if ($urandom_range(0, 1)) instr[14:12] = 3'($urandom_range(0, 3));
      end
      @(posedge clk);
      checks++;
      if ({acc, wb, ls, ux} !== expect_of(instr)) begin
        failures++;
        if (failures < 10) $display("FAIL %h got=%b exp=%b", instr, {acc, wb, ls, ux}, expect_of(instr));
      end
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
