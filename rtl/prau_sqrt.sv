// prau_sqrt: exact posit<N,2> square root of the PRAU.
//
// An odd scale is made even by doubling the significand, so the operand is
// m * 2^(2s) with m in [1,4). The root of m is computed bit by bit (a
// restoring integer square root of m shifted left by 29 bits, giving a
// 21-bit root with 20 fraction bits); a remainder left over becomes the
// sticky bit, and the posit encoder rounds the root to nearest even. A
// negative operand or NaR gives NaR, zero gives zero. Purely combinational.
// The paper's configuration uses the exact unit; the digit-by-digit method is
// this design's choice.
module prau_sqrt #(
  parameter int unsigned N = 16
) (
  input  logic [N-1:0] a,
  output logic [N-1:0] result
);
  localparam int SIGW = N - 4;
  localparam int SW   = 8;
  localparam int FW   = 28;
  localparam int RW   = 21;                 // root width
  localparam int MW   = 2 * RW;             // radicand width

  logic sa, za, na;
  logic signed [SW-1:0] ea;
  logic [SIGW-1:0] ma;
  logic [SIGW:0]   m;
  logic [MW-1:0]   rad;
  logic [RW-1:0]   root, t;
  logic signed [11:0] scale;
  logic [FW-1:0] frac;
  logic [N-1:0]  enc_p;

  posit_decoder #(.N(N), .SW(SW)) u_dec_a (.p(a), .sgn(sa), .zero(za), .nar(na), .scale(ea), .sig(ma));

  always_comb begin
    if (ea[0]) begin
      m     = {ma, 1'b0};
      scale = (12'(ea) - 12'sd1) >>> 1;
    end else begin
      m     = {1'b0, ma};
      scale = 12'(ea) >>> 1;
    end
    // m carries SIGW-1 fraction bits; shifted so the radicand has 2*(RW-1) fraction bits
    rad  = MW'(m) << (2 * (RW - 1) - (SIGW - 1));
    root = '0;
    for (int i = RW - 1; i >= 0; i--) begin
      t = root | (RW'(1) << i);
      if (MW'(t) * MW'(t) <= rad) root = t;
    end
    frac = {root[RW-2:0], {(FW - RW + 1){1'b0}}};
  end

  posit_encoder #(.N(N), .FW(FW), .SCW(12)) u_enc (
    .sgn(1'b0), .zero(za), .nar(na | sa), .scale(scale), .frac(frac),
    .sticky(MW'(root) * MW'(root) != rad), .p(enc_p));

  assign result = enc_p;
endmodule
