// prau_div: exact posit<N,2> divider of the PRAU.
//
// The dividend significand, extended by 28 zero bits, is divided by the
// divisor significand with one combinational integer division. The quotient
// lies in (2^27, 2^29); it is normalised so that its leading one becomes the
// hidden bit, and a non-zero remainder becomes the sticky bit, so the posit
// encoder rounds the exact quotient to nearest even. NaR operands and a zero
// divisor give NaR; a zero dividend gives zero. Purely combinational. The
// paper's configuration uses the exact divider; how it computes the quotient
// is not described there, so the integer division is this design's choice.
module prau_div #(
  parameter int unsigned N = 16
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  output logic [N-1:0] result
);
  localparam int SIGW = N - 4;
  localparam int SW   = 8;
  localparam int FW   = 28;
  localparam int QW   = SIGW + FW;

  logic sa, sb, za, zb, na, nb;
  logic signed [SW-1:0] ea, eb;
  logic [SIGW-1:0] ma, mb;
  logic [QW-1:0] num, q, rem;
  logic [FW-1:0] frac;
  logic signed [11:0] scale;
  logic [N-1:0] enc_p;

  posit_decoder #(.N(N), .SW(SW)) u_dec_a (.p(a), .sgn(sa), .zero(za), .nar(na), .scale(ea), .sig(ma));
  posit_decoder #(.N(N), .SW(SW)) u_dec_b (.p(b), .sgn(sb), .zero(zb), .nar(nb), .scale(eb), .sig(mb));

  always_comb begin
    num   = {ma, {FW{1'b0}}};
    q     = num / QW'(mb);
    rem   = num % QW'(mb);
    scale = 12'(ea) - 12'(eb);
    if (q[FW]) begin
      frac = q[FW-1:0];
    end else begin
      scale = scale - 12'sd1;
      frac  = {q[FW-2:0], 1'b0};
    end
  end

  posit_encoder #(.N(N), .FW(FW), .SCW(12)) u_enc (
    .sgn(sa ^ sb), .zero(za), .nar(na | nb | zb), .scale(scale), .frac(frac),
    .sticky(rem != '0), .p(enc_p));

  assign result = enc_p;
endmodule
