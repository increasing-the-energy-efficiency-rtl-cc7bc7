// coprosit_decoder: decodes the instruction at the head of the input buffer.
//
// From the instruction word alone it derives the execution unit (PRAU,
// comparison ALU or memory), the operator, the register addresses, which
// posit registers are read, whether x[rs1] is used, whether the destination
// is an integer or a posit register, and the load/store offset. Words that
// are not posit instructions give valid=0 (the predecoder has already
// rejected them, so this is only a guard). Purely combinational. The encoding
// is this design's (see coprosit_pkg); the paper gives the decoder's role.
module coprosit_decoder (
  input  logic [31:0]              instr_i,
  output coprosit_pkg::decoded_t   dec_o
);
  import coprosit_pkg::*;

  logic [4:0] f5;
  logic [2:0] f3;
  assign f5 = instr_i[31:27];
  assign f3 = instr_i[14:12];

  always_comb begin
    dec_o          = '0;
    dec_o.unit     = UNIT_PRAU;
    dec_o.prau_op  = PRAU_ADD;
    dec_o.alu_op   = ALU_EQ;
    dec_o.rd       = instr_i[11:7];
    dec_o.rs1      = instr_i[19:15];
    dec_o.rs2      = instr_i[24:20];
    unique case (instr_i[6:0])
      OPC_PLOAD: if (f3 == F3_HALF) begin
        dec_o.valid    = 1'b1;
        dec_o.unit     = UNIT_MEM;
        dec_o.use_xrs1 = 1'b1;
        dec_o.imm      = instr_i[31:20];
      end
      OPC_PSTORE: if (f3 == F3_HALF) begin
        dec_o.valid    = 1'b1;
        dec_o.unit     = UNIT_MEM;
        dec_o.is_store = 1'b1;
        dec_o.use_xrs1 = 1'b1;
        dec_o.use_prs2 = 1'b1;
        dec_o.imm      = {instr_i[31:25], instr_i[11:7]};
      end
      OPC_POP: begin
        dec_o.valid    = 1'b1;
        dec_o.use_prs1 = 1'b1;
        dec_o.use_prs2 = 1'b1;
        unique case (f5)
          F5_ADD:  dec_o.prau_op = PRAU_ADD;
          F5_SUB:  dec_o.prau_op = PRAU_SUB;
          F5_MUL:  dec_o.prau_op = PRAU_MUL;
          F5_DIV:  dec_o.prau_op = PRAU_DIV;
          F5_SQRT: begin dec_o.prau_op = PRAU_SQRT; dec_o.use_prs2 = 1'b0; end
          F5_SGNJ: begin
            unique case (f3)
              3'd0:    dec_o.prau_op = PRAU_SGNJ;
              3'd1:    dec_o.prau_op = PRAU_SGNJN;
              3'd2:    dec_o.prau_op = PRAU_SGNJX;
              default: dec_o.valid   = 1'b0;
            endcase
          end
          F5_MINMAX: begin
            dec_o.unit   = UNIT_ALU;
            dec_o.alu_op = f3[0] ? ALU_MAX : ALU_MIN;
            if (f3[2:1] != 2'b00) dec_o.valid = 1'b0;
          end
          F5_CMP: begin
            dec_o.unit    = UNIT_ALU;
            dec_o.rd_is_x = 1'b1;
            unique case (f3)
              3'd2:    dec_o.alu_op = ALU_EQ;
              3'd1:    dec_o.alu_op = ALU_LT;
              3'd0:    dec_o.alu_op = ALU_LE;
              default: dec_o.valid  = 1'b0;
            endcase
          end
          F5_P2I: begin
            dec_o.prau_op  = instr_i[20] ? PRAU_P2U : PRAU_P2I;
            dec_o.rd_is_x  = 1'b1;
            dec_o.use_prs2 = 1'b0;
          end
          F5_I2P: begin
            dec_o.prau_op  = instr_i[20] ? PRAU_U2P : PRAU_I2P;
            dec_o.use_prs1 = 1'b0;
            dec_o.use_prs2 = 1'b0;
            dec_o.use_xrs1 = 1'b1;
          end
          F5_MVXP: begin
            dec_o.prau_op  = PRAU_MVXP;
            dec_o.rd_is_x  = 1'b1;
            dec_o.use_prs2 = 1'b0;
          end
          F5_MVPX: begin
            dec_o.prau_op  = PRAU_MVPX;
            dec_o.use_prs1 = 1'b0;
            dec_o.use_prs2 = 1'b0;
            dec_o.use_xrs1 = 1'b1;
          end
          default: dec_o.valid = 1'b0;
        endcase
      end
      default: dec_o.valid = 1'b0;
    endcase
  end
endmodule
