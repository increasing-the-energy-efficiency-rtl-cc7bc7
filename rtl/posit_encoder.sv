// posit_encoder: builds a rounded posit<N,2> from sign, scale and fraction.
//
// The input value is (-1)^sgn * 1.frac * 2^scale with FW fraction bits and a
// sticky bit for anything below them. The encoder places the regime for
// r = floor(scale/4), the two exponent bits and the fraction in one word by a
// single shift that fills with the regime bit, then rounds the N-1 magnitude
// bits to nearest, ties to even, using the first dropped bit as guard and the
// rest plus the sticky input as sticky. As the posit standard asks, rounding
// never gives zero or NaR: a scale above maxpos saturates to maxpos, one below
// minpos gives minpos, and no increment is made past maxpos. A negative result
// is the two's complement of the magnitude. Zero and NaR inputs pass through.
// Purely combinational.
module posit_encoder #(
  parameter int unsigned N   = 16,
  parameter int unsigned FW  = 28,   // fraction bits at the input
  parameter int unsigned SCW = 12    // width of the signed scale
) (
  input  logic                  sgn,
  input  logic                  zero,
  input  logic                  nar,
  input  logic signed [SCW-1:0] scale,
  input  logic [FW-1:0]         frac,
  input  logic                  sticky,
  output logic [N-1:0]          p
);
  localparam int MAXSCALE = 4 * (int'(N) - 2);
  localparam int PW = 4 + FW;          // regime start, terminator, exponent, fraction
  localparam int TW = PW + N + 2;      // room to shift by up to N-2

  logic signed [SCW-1:0] r;
  logic [1:0]   e;
  logic [PW-1:0] pattern;
  logic [TW-1:0] x;
  logic [N-2:0]  top, mag;
  logic          guard, st, inc;
  int unsigned   sh;

  always_comb begin
    r = scale >>> 2;
    e = scale[1:0];
    if (r >= 0) begin
      pattern = {2'b10, e, frac};
      sh      = unsigned'(int'(r));
    end else begin
      pattern = {2'b01, e, frac};
      sh      = unsigned'(-int'(r) - 1);
    end
    if (sh > unsigned'(N)) sh = N;
    x     = TW'($signed({pattern, {(N + 2){1'b0}}}) >>> sh);
    top   = x[TW-1 -: N-1];
    guard = x[TW-N];
    st    = (|x[TW-N-1:0]) | sticky;
    inc   = guard & (st | top[0]) & ~(&top);
    mag   = top + (N-1)'(inc);
    if (int'(scale) > MAXSCALE)       mag = '1;                       // maxpos
    else if (int'(scale) < -MAXSCALE) mag = {{(N-2){1'b0}}, 1'b1};    // minpos
    if (nar)       p = {1'b1, {(N-1){1'b0}}};
    else if (zero) p = '0;
    else           p = sgn ? (~{1'b0, mag} + 1'b1) : {1'b0, mag};
  end
endmodule
