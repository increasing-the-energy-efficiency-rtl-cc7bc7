// prau_conv: conversions between posit<N,2> and 32- or 64-bit integers.
//
// Posit to integer (to_int=1): the significand is shifted into a 128-bit
// fixed-point word with 64 fraction bits, rounded to nearest even and
// saturated to the range of the selected integer type; negative values give
// 0 for the unsigned forms; NaR gives the most negative integer of the type
// (0x8000_0000 or 0x8000_0000_0000_0000), the integer the posit standard
// pairs with NaR. A 32-bit result is sign-extended to 64 bits, as RV64 does
// for its word conversions.
// Integer to posit (to_int=0): the 64-bit source (for the word forms, the
// low 32 bits sign- or zero-extended) is made positive, normalised by a
// leading-one search and rounded by the posit encoder.
// Ports: to_int, is_unsigned, is_long (64-bit integer side), posit_in,
// int_in[63:0], result[63:0] (integer, or the posit zero-extended).
// Purely combinational.
// The four families (32/64-bit, signed/unsigned, both directions) follow the
// paper's PRAU; rounding, saturation and the NaR integer are this design's
// choice.
module prau_conv #(
  parameter int unsigned N = 16
) (
  input  logic         to_int,       // 1: posit -> integer, 0: integer -> posit
  input  logic         is_unsigned,  // integer side is unsigned
  input  logic         is_long,      // integer side is 64 bits (else 32)
  input  logic [N-1:0] posit_in,
  input  logic [63:0]  int_in,
  output logic [63:0]  result
);
  localparam int SIGW = N - 4;
  localparam int SW   = 8;
  localparam int FW   = 28;

  // ---------------------------------------------------------- posit -> int
  logic s, z, nr;
  logic signed [SW-1:0] sc;
  logic [SIGW-1:0] sig;
  logic [127:0] fx;
  logic [64:0]  rnd;
  logic         inc;
  logic [63:0]  p2i;
  logic [31:0]  w;

  posit_decoder #(.N(N), .SW(SW)) u_dec (.p(posit_in), .sgn(s), .zero(z), .nar(nr), .scale(sc), .sig(sig));

  always_comb begin
    fx  = '0;
    w   = '0;
    if (int'(sc) >= -1 && int'(sc) < 64)
      fx = 128'(sig) << (int'(sc) + 64 - (SIGW - 1));
    inc = fx[63] & ((|fx[62:0]) | fx[64]);
    rnd = {1'b0, fx[127:64]} + 65'(inc);
    if (is_long) begin
      if (nr)                  p2i = 64'h8000_0000_0000_0000;
      else if (z)              p2i = '0;
      else if (is_unsigned) begin
        if (s)                 p2i = '0;
        else if (int'(sc) >= 64 || rnd[64]) p2i = '1;
        else                   p2i = rnd[63:0];
      end else begin
        if (!s && (int'(sc) >= 63 || rnd > 65'h0_7fff_ffff_ffff_ffff)) p2i = 64'h7fff_ffff_ffff_ffff;
        else if (s && (int'(sc) >= 64 || rnd > 65'h0_8000_0000_0000_0000)) p2i = 64'h8000_0000_0000_0000;
        else                   p2i = s ? (~rnd[63:0] + 1'b1) : rnd[63:0];
      end
    end else begin
      if (nr)                  w = 32'h8000_0000;
      else if (z)              w = '0;
      else if (is_unsigned) begin
        if (s)                 w = '0;
        else if (int'(sc) >= 32 || rnd > 65'h0_0000_0000_ffff_ffff) w = 32'hffff_ffff;
        else                   w = rnd[31:0];
      end else begin
        if (!s && (int'(sc) >= 31 || rnd > 65'h0_0000_0000_7fff_ffff)) w = 32'h7fff_ffff;
        else if (s && (int'(sc) >= 32 || rnd > 65'h0_0000_0000_8000_0000)) w = 32'h8000_0000;
        else                   w = s ? (~rnd[31:0] + 1'b1) : rnd[31:0];
      end
      p2i = {{32{w[31]}}, w};
    end
  end

  // ---------------------------------------------------------- int -> posit
  logic        isgn;
  logic [63:0] src, imag, inorm;
  int unsigned lp;
  logic [N-1:0] i2p;

  always_comb begin
    if (is_long)          src = int_in;
    else if (is_unsigned) src = {32'h0, int_in[31:0]};
    else                  src = {{32{int_in[31]}}, int_in[31:0]};
    isgn  = !is_unsigned && src[63];
    imag  = isgn ? (~src + 1'b1) : src;
    lp    = 0;
    for (int i = 0; i < 64; i++) if (imag[i]) lp = unsigned'(i);
    inorm = imag << (63 - lp);
  end

  posit_encoder #(.N(N), .FW(FW), .SCW(12)) u_enc (
    .sgn(isgn), .zero(imag == '0), .nar(1'b0), .scale(12'(lp)),
    .frac(inorm[62:35]), .sticky(|inorm[34:0]), .p(i2p));

  assign result = to_int ? p2i : {{(64 - N){1'b0}}, i2p};
endmodule
