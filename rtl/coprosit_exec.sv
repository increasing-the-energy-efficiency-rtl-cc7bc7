// coprosit_exec: the execution stage of Coprosit.
//
// It selects the operands of the decoded instruction: posit rs1/rs2 from the
// register file, or the load data arriving on the memory result interface in
// the same cycle when the controller asks for forwarding; the integer operand
// is x[rs1] as delivered by the CPU at issue. It then drives the PRAU (through
// its valid/ready handshake) or the comparison ALU and returns the result.
// For memory instructions it forms the address x[rs1] + sign-extended offset
// and the store data (posit rs2, zero-extended). All paths are combinational,
// so an instruction is executed in the cycle the controller fires it.
// The PRAU's integer side is 64 bits wide; this RV32 stage gives it x[rs1]
// zero-extended and keeps the low 32 bits of its result.
// The PRAU and ALU inside the stage follow the paper's block diagram; the
// operand selection and address generation are this design's.
module coprosit_exec #(
  parameter int unsigned N = 16
) (
  input  coprosit_pkg::decoded_t dec_i,
  input  logic [31:0]            xrs1_i,
  input  logic [N-1:0]           rdata_a_i,
  input  logic [N-1:0]           rdata_b_i,
  input  logic                   fwd_a_i,
  input  logic                   fwd_b_i,
  input  logic [N-1:0]           fwd_data_i,
  input  logic                   in_valid_i,
  output logic                   in_ready_o,
  output logic                   out_valid_o,
  input  logic                   out_ready_i,
  output logic [31:0]            result_o,
  output logic [31:0]            mem_addr_o,
  output logic [31:0]            mem_wdata_o
);
  import coprosit_pkg::*;

  logic [N-1:0] op_a, op_b;
  logic [63:0]  prau_res;
  logic [31:0]  alu_res;
  logic         prau_in_valid, prau_in_ready, prau_out_valid;

  assign op_a = fwd_a_i ? fwd_data_i : rdata_a_i;
  assign op_b = fwd_b_i ? fwd_data_i : rdata_b_i;

  assign prau_in_valid = in_valid_i && (dec_i.unit == UNIT_PRAU);

  prau #(.N(N)) u_prau (
    .in_valid(prau_in_valid), .in_ready(prau_in_ready), .op(dec_i.prau_op),
    .operand_a(op_a), .operand_b(op_b), .operand_int({32'h0, xrs1_i}),
    .out_valid(prau_out_valid), .out_ready(out_ready_i), .result(prau_res));

  posit_alu #(.N(N)) u_alu (.op(dec_i.alu_op), .a(op_a), .b(op_b), .result(alu_res));

  always_comb begin
    if (dec_i.unit == UNIT_PRAU) begin
      in_ready_o  = prau_in_ready;
      out_valid_o = prau_out_valid;
      result_o    = prau_res[31:0];
    end else begin
      in_ready_o  = out_ready_i;
      out_valid_o = in_valid_i;
      result_o    = alu_res;
    end
  end

  assign mem_addr_o  = xrs1_i + {{20{dec_i.imm[11]}}, dec_i.imm};
  assign mem_wdata_o = {{(32 - N){1'b0}}, op_b};
endmodule
