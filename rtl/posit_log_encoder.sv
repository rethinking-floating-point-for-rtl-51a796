// posit_log_encoder: encodes a log value +-2^(e + q/128) as an (8,1)
// posit-tapered log word with round-to-nearest-even.
//
// Combinational. The regime r = floor(e/2) and exponent bit e[0] are laid
// out as in a posit (r >= 0: r+1 ones and a zero; r < 0: -r zeros and a
// one), followed by the exponent bit and the 7-bit log fraction q. The
// string is cut to the 7 bits after the sign; the first dropped bit is the
// guard bit, the rest OR into a sticky bit, and the result is rounded to
// nearest, ties to even, so the 3 extra fraction bits of gamma = 7 act as
// guard, round and sticky bits. As for posits, finite non-zero values never
// round to zero or infinity: beyond 2^12 they saturate to the largest
// word, below 2^-12 to the smallest. Negative words are two's complements.
//
// The tapering and round-to-nearest-even are the paper's; saturation is
// the usual posit rule, which the paper does not restate.
module posit_log_encoder
  import elma_pkg::*;
(
  input  logic               sign,
  input  logic               zero,
  input  logic               inf,
  input  logic signed [7:0]  e,
  input  logic [GAMMA-1:0]   q,
  output word_t              word
);

  localparam int unsigned SW = 16;                   // bit string length
  localparam logic signed [7:0] EMAX = 8'(MAXEXP);
  localparam word_t MAXPOS = {1'b0, {(N-1){1'b1}}};
  localparam word_t MINPOS = word_t'(1);

  logic signed [7:0] r;
  int unsigned       k, len;
  logic [SW-1:0]     regime_bits, full;
  logic [N-2:0]      top;
  logic              guard, sticky, up;
  word_t             mag;

  always_comb begin
    r = e >>> 1;
    if (r >= 0) begin
      k           = unsigned'(int'(r)) + 1;
      len         = k + 1;
      regime_bits = ((SW'(1) << k) - SW'(1)) << 1;
    end else begin
      k           = unsigned'(-int'(r));
      len         = k + 1;
      regime_bits = SW'(1);
    end
    full   = (regime_bits << (SW - len)) |
             (SW'({e[0], q}) << (SW - len - (GAMMA + 1)));
    top    = full[SW-1 -: N-1];
    guard  = full[SW-N];
    sticky = |full[SW-N-1:0];
    up     = guard & (sticky | top[0]);
    mag    = {1'b0, top} + word_t'(up);

    if (e >= EMAX)       mag = MAXPOS;
    else if (e < -EMAX)  mag = MINPOS;

    if (inf)       word = WORD_INF;
    else if (zero) word = WORD_ZERO;
    else           word = sign ? (~mag + word_t'(1)) : mag;
  end

endmodule
