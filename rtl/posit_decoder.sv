// posit_decoder: splits a posit<N,2> into sign, scale and significand.
//
// The 2022 Posit Standard fixes the exponent size at two bits. A posit is a
// sign bit, a regime (a run of equal bits ended by the opposite bit or by the
// end of the word), two exponent bits and a fraction. This decoder works in
// sign-magnitude form: it takes the two's complement of a negative posit,
// counts the regime run, and shifts the regime out. The value is
//   (-1)^sgn * sig * 2^(scale - (N-5)),  sig = 1.fraction with N-4 bits,
//   scale = 4*r + e.
// Zero (all zeros) and NaR (1 followed by zeros) are flagged separately.
// Purely combinational.
module posit_decoder #(
  parameter int unsigned N  = 16,
  parameter int unsigned SW = 8      // width of the signed scale
) (
  input  logic [N-1:0]         p,
  output logic                 sgn,
  output logic                 zero,
  output logic                 nar,
  output logic signed [SW-1:0] scale,
  output logic [N-5:0]         sig     // hidden bit at the MSB
);
  logic [N-2:0] body, shifted;
  logic         r0;
  int unsigned  k;
  logic signed [SW-1:0] r;

  always_comb begin
    sgn  = p[N-1];
    zero = (p == '0);
    nar  = (p == {1'b1, {(N-1){1'b0}}});
    body = sgn ? (~p[N-2:0] + 1'b1) : p[N-2:0];   // magnitude bits
    r0   = body[N-2];
    // length of the regime run
    k = N - 1;
    for (int i = N - 2; i >= 0; i--) begin
      if (body[i] != r0) begin
        k = unsigned'(N - 2 - i);
        break;
      end
    end
    shifted = (k + 1 >= N - 1) ? '0 : (body << (k + 1));
    r       = r0 ? SW'(signed'(k) - 1) : -SW'(signed'(k));
    scale   = (r <<< 2) + SW'({1'b0, shifted[N-2 -: 2]});
    sig     = {1'b1, shifted[N-4:2]};  // the two LSBs of shifted are always zero
  end
endmodule
