// prau_mul: exact posit<N,2> multiplier of the PRAU.
//
// The two significands (N-4 bits each, hidden one included) are multiplied
// in full; the product lies in [1,4) and is renormalised by one position if
// it reached 2. Scales add, signs xor, and the posit encoder rounds the full
// product to nearest even. Any NaR operand gives NaR, any zero gives zero.
// Purely combinational. The paper's configuration uses the exact multiplier;
// the approximate variant it also mentions is not part of this design.
module prau_mul #(
  parameter int unsigned N = 16
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  output logic [N-1:0] result
);
  localparam int SIGW = N - 4;
  localparam int SW   = 8;
  localparam int FW   = 28;

  logic sa, sb, za, zb, na, nb;
  logic signed [SW-1:0] ea, eb;
  logic [SIGW-1:0] ma, mb;
  logic [2*SIGW-1:0] prod;
  logic [FW-1:0] frac;
  logic signed [11:0] scale;
  logic [N-1:0] enc_p;

  posit_decoder #(.N(N), .SW(SW)) u_dec_a (.p(a), .sgn(sa), .zero(za), .nar(na), .scale(ea), .sig(ma));
  posit_decoder #(.N(N), .SW(SW)) u_dec_b (.p(b), .sgn(sb), .zero(zb), .nar(nb), .scale(eb), .sig(mb));

  always_comb begin
    prod  = ma * mb;
    scale = 12'(ea) + 12'(eb);
    if (prod[2*SIGW-1]) begin
      scale = scale + 12'sd1;
      frac  = {prod[2*SIGW-2:0], {(FW - 2*SIGW + 1){1'b0}}};
    end else begin
      frac  = {prod[2*SIGW-3:0], {(FW - 2*SIGW + 2){1'b0}}};
    end
  end

  posit_encoder #(.N(N), .FW(FW), .SCW(12)) u_enc (
    .sgn(sa ^ sb), .zero(za | zb), .nar(na | nb), .scale(scale), .frac(frac), .sticky(1'b0), .p(enc_p));

  assign result = enc_p;
endmodule
