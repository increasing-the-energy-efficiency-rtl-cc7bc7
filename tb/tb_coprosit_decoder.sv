// tb_coprosit_decoder: self-checking testbench of coprosit_decoder.
//
// For each posit instruction form, random register fields and offsets are
// encoded, and every field of the decoded struct that the form defines (unit,
// operator, registers, operand use, destination kind, offset) is compared
// with the value expected for that form. Non-posit words must give valid=0.
module tb_coprosit_decoder;
  import coprosit_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [31:0] instr;
  decoded_t    dec, e;

  coprosit_decoder dut (.instr_i(instr), .dec_o(dec));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL %s instr=%h", what, instr);
    end
  endtask

  initial begin
    logic [4:0] rd, rs1, rs2;
    logic [11:0] imm;
    int k;
    instr = 0;
    for (int i = 0; i < 20000; i++) begin
      rd = 5'($urandom); rs1 = 5'($urandom); rs2 = 5'($urandom); imm = 12'($urandom);
      e = '0; e.valid = 1; e.rd = rd; e.rs1 = rs1; e.rs2 = rs2;
      e.unit = UNIT_PRAU; e.use_prs1 = 1; e.use_prs2 = 1;
      k = $urandom_range(0, 14);
      case (k)
        0: begin instr = {imm, rs1, 3'b001, rd, 7'b0001011}; e.unit = UNIT_MEM; e.use_prs1 = 0; e.use_prs2 = 0;
                 e.use_xrs1 = 1; e.imm = imm; e.rs2 = imm[4:0]; end
        1: begin instr = {imm[11:5], rs2, rs1, 3'b001, imm[4:0], 7'b0101011}; e.unit = UNIT_MEM; e.use_prs1 = 0;
                 e.is_store = 1; e.use_xrs1 = 1; e.imm = imm; e.rd = imm[4:0]; end
        2: begin instr = {5'b00000, 2'b01, rs2, rs1, 3'b000, rd, 7'b1011011}; e.prau_op = PRAU_ADD; end
        3: begin instr = {5'b00001, 2'b01, rs2, rs1, 3'b000, rd, 7'b1011011}; e.prau_op = PRAU_SUB; end
        4: begin instr = {5'b00010, 2'b01, rs2, rs1, 3'b000, rd, 7'b1011011}; e.prau_op = PRAU_MUL; end
        5: begin instr = {5'b00011, 2'b01, rs2, rs1, 3'b000, rd, 7'b1011011}; e.prau_op = PRAU_DIV; end
        6: begin e.rs2 = 0; instr = {5'b01011, 2'b01, 5'd0, rs1, 3'b000, rd, 7'b1011011}; e.prau_op = PRAU_SQRT; e.use_prs2 = 0; end
        7: begin instr = {5'b00100, 2'b01, rs2, rs1, 3'b001, rd, 7'b1011011}; e.prau_op = PRAU_SGNJN; end
        8: begin instr = {5'b00101, 2'b01, rs2, rs1, 3'b001, rd, 7'b1011011}; e.unit = UNIT_ALU; e.alu_op = ALU_MAX; end
        9: begin instr = {5'b10100, 2'b01, rs2, rs1, 3'b001, rd, 7'b1011011}; e.unit = UNIT_ALU; e.alu_op = ALU_LT; e.rd_is_x = 1; end
        10: begin e.rs2 = 1; instr = {5'b11000, 2'b01, 5'd1, rs1, 3'b000, rd, 7'b1011011}; e.prau_op = PRAU_P2U; e.rd_is_x = 1; e.use_prs2 = 0; end
        11: begin e.rs2 = 0; instr = {5'b11010, 2'b01, 5'd0, rs1, 3'b000, rd, 7'b1011011}; e.prau_op = PRAU_I2P;
                  e.use_prs1 = 0; e.use_prs2 = 0; e.use_xrs1 = 1; end
        12: begin e.rs2 = 0; instr = {5'b11100, 2'b01, 5'd0, rs1, 3'b000, rd, 7'b1011011}; e.prau_op = PRAU_MVXP; e.rd_is_x = 1; e.use_prs2 = 0; end
        13: begin e.rs2 = 0; instr = {5'b11110, 2'b01, 5'd0, rs1, 3'b000, rd, 7'b1011011}; e.prau_op = PRAU_MVPX;
                  e.use_prs1 = 0; e.use_prs2 = 0; e.use_xrs1 = 1; end
        default: begin instr = {$urandom} & 32'hffff_ff80 | 32'h33; e = '0; end
      endcase
      @(posedge clk);
      chk(dec.valid == e.valid, "valid");
      if (e.valid) begin
        chk(dec.unit == e.unit, "unit");
        if (e.unit == UNIT_PRAU) chk(dec.prau_op == e.prau_op, "prau_op");
        if (e.unit == UNIT_ALU)  chk(dec.alu_op == e.alu_op, "alu_op");
        chk(dec.rd == e.rd && dec.rs1 == e.rs1 && dec.rs2 == e.rs2, "registers");
        chk(dec.use_prs1 == e.use_prs1 && dec.use_prs2 == e.use_prs2 && dec.use_xrs1 == e.use_xrs1, "operand use");
        chk(dec.rd_is_x == e.rd_is_x, "rd_is_x");
        if (e.unit == UNIT_MEM) chk(dec.imm == e.imm && dec.is_store == e.is_store, "mem fields");
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
