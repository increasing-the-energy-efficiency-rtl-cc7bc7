// prau: Posit and quiRe Arithmetic Unit, in the configuration used by Coprosit
// (posit16, exact units, no quire).
//
// The operator selects one of the subunits: ADD/SUB, MUL, DIV, SQRT, the
// integer conversions and the move/sign-injection group. All subunits are
// combinational, so an operation is accepted and answered in the same cycle;
// the valid/ready handshakes on the input and the output side are joined
// straight through (in_ready = out_ready, out_valid = in_valid), and the
// result multiplexer picks the subunit output by operator. The integer side
// is 64 bits wide so that the 64-bit conversions fit: 32-bit integer results
// are sign-extended to 64 bits, posit results are zero-extended.
// Ports: in_valid/in_ready, op, operand_a/b (posits), operand_int (x register
// value), out_valid/out_ready, result.
// The set of operations (including 32- and 64-bit conversions) and the
// demux/mux structure follow the paper; the optional quire and the
// approximate units are not part of this configuration.
module prau #(
  parameter int unsigned N = 16
) (
  input  logic                  in_valid,
  output logic                  in_ready,
  input  coprosit_pkg::prau_op_e op,
  input  logic [N-1:0]          operand_a,
  input  logic [N-1:0]          operand_b,
  input  logic [63:0]           operand_int,
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [63:0]           result
);
  import coprosit_pkg::*;

  logic [N-1:0] r_add, r_mul, r_div, r_sqrt;
  logic [63:0]  r_conv;
  logic [31:0]  r_sgnj;
  logic         to_int, is_uns, is_long;

  assign to_int  = (op == PRAU_P2I) || (op == PRAU_P2U) || (op == PRAU_P2L) || (op == PRAU_P2LU);
  assign is_uns  = (op == PRAU_P2U) || (op == PRAU_U2P) || (op == PRAU_P2LU) || (op == PRAU_LU2P);
  assign is_long = (op == PRAU_P2L) || (op == PRAU_P2LU) || (op == PRAU_L2P) || (op == PRAU_LU2P);

  prau_addsub #(.N(N)) u_addsub (.a(operand_a), .b(operand_b), .sub(op == PRAU_SUB), .result(r_add));
  prau_mul    #(.N(N)) u_mul    (.a(operand_a), .b(operand_b), .result(r_mul));
  prau_div    #(.N(N)) u_div    (.a(operand_a), .b(operand_b), .result(r_div));
  prau_sqrt   #(.N(N)) u_sqrt   (.a(operand_a), .result(r_sqrt));
  prau_conv   #(.N(N)) u_conv   (.to_int(to_int), .is_unsigned(is_uns), .is_long(is_long), .posit_in(operand_a),
                                 .int_in(operand_int), .result(r_conv));
  prau_sgnj   #(.N(N)) u_sgnj   (.op(op), .a(operand_a), .b(operand_b), .int_in(operand_int[31:0]), .result(r_sgnj));

  always_comb begin
    unique case (op)
      PRAU_ADD, PRAU_SUB: result = 64'(r_add);
      PRAU_MUL:           result = 64'(r_mul);
      PRAU_DIV:           result = 64'(r_div);
      PRAU_SQRT:          result = 64'(r_sqrt);
      PRAU_P2I, PRAU_P2U, PRAU_I2P, PRAU_U2P,
      PRAU_P2L, PRAU_P2LU, PRAU_L2P, PRAU_LU2P: result = r_conv;
      default:            result = {{32{r_sgnj[31]}}, r_sgnj};
    endcase
  end

  assign in_ready  = out_ready;
  assign out_valid = in_valid;
endmodule
