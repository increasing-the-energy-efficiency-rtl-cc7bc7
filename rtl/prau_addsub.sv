// prau_addsub: posit<N,2> adder/subtractor of the PRAU.
//
// Subtraction negates b first (posit negation is the two's complement of the
// word, exact for every posit). The operand with the larger magnitude keeps
// its significand; the other is shifted right by the scale difference into a
// field with 16 guard bits, and any bit shifted out is jammed into its least
// significant bit so that the later rounding sees it. After the add or
// subtract the sum is renormalised by a leading-one search and handed to the
// posit encoder, which rounds to nearest even. NaR in gives NaR; an exact
// cancellation gives zero. Purely combinational, as the paper states for all
// computational operations of this configuration; the alignment width is this
// design's choice.
module prau_addsub #(
  parameter int unsigned N = 16
) (
  input  logic [N-1:0] a,
  input  logic [N-1:0] b,
  input  logic         sub,
  output logic [N-1:0] result
);
  localparam int SIGW = N - 4;          // significand bits incl. hidden one
  localparam int G    = 16;             // guard bits
  localparam int AW   = SIGW + G;       // aligned width
  localparam int SW   = 8;
  localparam int FW   = 28;

  logic [N-1:0] bb;
  logic sa, sb, za, zb, na, nb;
  logic signed [SW-1:0] ea, eb;
  logic [SIGW-1:0] ma, mb;

  assign bb = sub ? (~b + 1'b1) : b;

  posit_decoder #(.N(N), .SW(SW)) u_dec_a (.p(a),  .sgn(sa), .zero(za), .nar(na), .scale(ea), .sig(ma));
  posit_decoder #(.N(N), .SW(SW)) u_dec_b (.p(bb), .sgn(sb), .zero(zb), .nar(nb), .scale(eb), .sig(mb));

  logic                 swap, sx, eff_sub;
  logic signed [SW-1:0] ex;
  logic [SIGW-1:0]      mx, my;
  int unsigned          d;
  logic [AW-1:0]        yal, ymask;
  logic                 ystk;
  logic [AW:0]          sum;
  int unsigned          lp;
  logic [AW:0]          norm;
  logic signed [11:0]   scale;
  logic [FW-1:0]        frac;
  logic                 enc_zero;
  logic [N-1:0]         enc_p;

  always_comb begin
    swap    = (eb > ea) || ((eb == ea) && (mb > ma));
    sx      = swap ? sb : sa;
    ex      = swap ? eb : ea;
    mx      = swap ? mb : ma;
    my      = swap ? ma : mb;
    d       = unsigned'(swap ? (int'(eb) - int'(ea)) : (int'(ea) - int'(eb)));
    eff_sub = sa ^ sb;
    ymask = '0;
    if (d >= unsigned'(AW)) begin
      yal  = '0;
      ystk = 1'b1;
    end else begin
      ymask = (AW'(1) << d) - 1'b1;
      yal   = {my, {G{1'b0}}} >> d;
      ystk  = |({my, {G{1'b0}}} & ymask);
    end
    yal[0] = yal[0] | ystk;
    sum    = eff_sub ? ({1'b0, mx, {G{1'b0}}} - {1'b0, yal})
                     : ({1'b0, mx, {G{1'b0}}} + {1'b0, yal});
    lp = 0;
    for (int i = 0; i <= AW; i++) if (sum[i]) lp = unsigned'(i);
    norm     = sum << (AW - int'(lp));
    frac     = {norm[AW-1:0], {(FW - AW){1'b0}}};
    scale    = 12'(ex) + 12'(int'(lp) - (AW - 1));
    enc_zero = (sum == '0);
  end

  posit_encoder #(.N(N), .FW(FW), .SCW(12)) u_enc (
    .sgn(sx), .zero(enc_zero), .nar(1'b0), .scale(scale), .frac(frac), .sticky(1'b0), .p(enc_p));

  always_comb begin
    if (na || nb)  result = {1'b1, {(N-1){1'b0}}};
    else if (za)   result = bb;
    else if (zb)   result = a;
    else           result = enc_p;
  end
endmodule
