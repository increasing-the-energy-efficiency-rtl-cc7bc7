// prau_sgnj: move and sign-injection operations of the PRAU.
//
// A posit is negated by taking the two's complement of its word, so sign
// injection keeps rs1 when its sign bit already equals the wanted sign and
// negates it otherwise (zero and NaR are their own negation):
//   SGNJ  wanted sign = sign(b),  SGNJN = ~sign(b),  SGNJX = sign(a)^sign(b).
// MVXP copies a posit to an integer register, sign-extended to 32 bits;
// MVPX takes the low N bits of an integer register as a posit. Purely
// combinational. The operations are the paper's; the two's-complement form of
// sign injection and the sign extension are this design's reading of them.
module prau_sgnj #(
  parameter int unsigned N = 16
) (
  input  coprosit_pkg::prau_op_e op,
  input  logic [N-1:0]           a,
  input  logic [N-1:0]           b,
  input  logic [31:0]            int_in,
  output logic [31:0]            result
);
  import coprosit_pkg::*;
  logic         want;
  logic [N-1:0] inj;

  always_comb begin
    unique case (op)
      PRAU_SGNJN: want = ~b[N-1];
      PRAU_SGNJX: want = a[N-1] ^ b[N-1];
      default:    want = b[N-1];
    endcase
    inj = (a[N-1] == want) ? a : (~a + 1'b1);
    unique case (op)
      PRAU_MVXP: result = {{(32 - N){a[N-1]}}, a};
      PRAU_MVPX: result = {{(32 - N){1'b0}}, int_in[N-1:0]};
      default:   result = {{(32 - N){1'b0}}, inj};
    endcase
  end
endmodule
