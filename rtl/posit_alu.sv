// posit_alu: the small comparison ALU beside the PRAU in Coprosit.
//
// Posits are ordered like two's complement integers, and NaR (the most
// negative integer) is below every other posit and equal to itself, so all
// comparisons are signed integer comparisons:
//   EQ, LT, LE  -> 1 or 0 in an integer register,
//   MIN, MAX    -> the smaller or larger posit (zero-extended).
// Purely combinational. The comparisons follow the paper; placing MIN and MAX
// here is this design's choice.
module posit_alu #(
  parameter int unsigned N = 16
) (
  input  coprosit_pkg::alu_op_e op,
  input  logic [N-1:0]          a,
  input  logic [N-1:0]          b,
  output logic [31:0]           result
);
  import coprosit_pkg::*;
  logic lt, eq;
  assign lt = $signed(a) < $signed(b);
  assign eq = (a == b);

  always_comb begin
    unique case (op)
      ALU_EQ:  result = 32'(eq);
      ALU_LT:  result = 32'(lt);
      ALU_LE:  result = 32'(lt | eq);
      ALU_MIN: result = 32'(lt ? a : b);
      ALU_MAX: result = 32'(lt ? b : a);
      default: result = '0;
    endcase
  end
endmodule
