// coprosit_predecoder: answers the CV-X-IF issue request.
//
// It matches the offered instruction word against a table of mask/match
// pairs, one per posit instruction form, and returns in the same cycle
// whether Coprosit accepts it, whether it will write an integer register
// (writeback), whether it uses the memory interface (loadstore), and whether
// it needs the value of x[rs1] from the CPU. The table is the instruction
// encoding of this design (see coprosit_pkg); the paper gives the predecoder's
// role, not its contents.
module coprosit_predecoder (
  input  logic [31:0] instr_i,
  output logic        accept_o,
  output logic        writeback_o,
  output logic        loadstore_o,
  output logic        use_xrs1_o
);
  import coprosit_pkg::*;

  typedef struct packed {
    logic [31:0] mask;
    logic [31:0] match;
    logic        writeback;
    logic        loadstore;
    logic        use_xrs1;
  } pd_entry_t;

  // funct5 in [31:27], rs2 in [24:20], funct3 in [14:12], opcode in [6:0]
  localparam logic [31:0] M_OP    = 32'hF800_007F;   // funct5 + opcode
  localparam logic [31:0] M_OP_F3 = 32'hF800_707F;   // + funct3
  localparam logic [31:0] M_OP_R2 = 32'hF9E0_007F;   // + rs2 but its LSB (0/1 selects signedness)
  localparam logic [31:0] M_OP_RZ = 32'hF9F0_007F;   // + whole rs2 (must be zero)
  localparam logic [31:0] M_MEM   = 32'h0000_707F;   // funct3 + opcode

  function automatic logic [31:0] op(logic [4:0] f5, logic [2:0] f3 = 3'b000);
    return {f5, 12'h0, f3, 5'h0, OPC_POP};
  endfunction

  localparam int NE = 15;
  localparam pd_entry_t TABLE [NE] = '{
    '{M_MEM,   {17'h0, F3_HALF, 5'h0, OPC_PLOAD},  1'b0, 1'b1, 1'b1},  // PLH
    '{M_MEM,   {17'h0, F3_HALF, 5'h0, OPC_PSTORE}, 1'b0, 1'b1, 1'b1},  // PSH
    '{M_OP,    op(F5_ADD),  1'b0, 1'b0, 1'b0},
    '{M_OP,    op(F5_SUB),  1'b0, 1'b0, 1'b0},
    '{M_OP,    op(F5_MUL),  1'b0, 1'b0, 1'b0},
    '{M_OP,    op(F5_DIV),  1'b0, 1'b0, 1'b0},
    '{M_OP_RZ, op(F5_SQRT), 1'b0, 1'b0, 1'b0},
    '{M_OP_F3, op(F5_SGNJ, 3'd0), 1'b0, 1'b0, 1'b0},
    '{M_OP_F3, op(F5_SGNJ, 3'd1), 1'b0, 1'b0, 1'b0},
    '{M_OP_F3, op(F5_SGNJ, 3'd2), 1'b0, 1'b0, 1'b0},
    '{32'hF800_607F, op(F5_MINMAX), 1'b0, 1'b0, 1'b0},              // funct3 0 or 1
    '{M_OP,    op(F5_CMP),  1'b1, 1'b0, 1'b0},                       // checked below for funct3
    '{M_OP_R2, op(F5_P2I),  1'b1, 1'b0, 1'b0},
    '{M_OP_R2, op(F5_I2P),  1'b0, 1'b0, 1'b1},
    '{M_OP,    op(F5_MVXP), 1'b1, 1'b0, 1'b0}
  };

  logic mvpx;
  assign mvpx = (instr_i & M_OP_F3) == op(F5_MVPX);

  always_comb begin
    accept_o    = mvpx;
    writeback_o = 1'b0;
    loadstore_o = 1'b0;
    use_xrs1_o  = mvpx;
    for (int i = 0; i < NE; i++) begin
      if ((instr_i & TABLE[i].mask) == TABLE[i].match) begin
        accept_o    = 1'b1;
        writeback_o = TABLE[i].writeback;
        loadstore_o = TABLE[i].loadstore;
        use_xrs1_o  = TABLE[i].use_xrs1;
      end
    end
    // comparisons exist for funct3 0, 1 and 2 only; MVXP only for funct3 0
    if ((instr_i & M_OP) == op(F5_CMP)  && instr_i[14:12] == 3'b011) accept_o = 1'b0;
    if ((instr_i & M_OP) == op(F5_CMP)  && instr_i[14])              accept_o = 1'b0;
    if ((instr_i & M_OP) == op(F5_MVXP) && instr_i[14:12] != 3'b000) accept_o = 1'b0;
    if (!accept_o) begin
      writeback_o = 1'b0;
      loadstore_o = 1'b0;
      use_xrs1_o  = 1'b0;
    end
  end
endmodule
