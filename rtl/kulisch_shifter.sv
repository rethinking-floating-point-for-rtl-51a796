// kulisch_shifter: aligns a product's linear significand to the Kulisch
// accumulator (6 -> 38 bits).
//
// Combinational. The product's linear value is +-1.p * 2^e with p from the
// r(p(f)) table and e = m + bias, where bias is the optional input exponent
// bias. The accumulator's least significant bit weighs 2^-24 (f_min^2), so
// the 6-bit significand {1, p} (weight of its LSB 2^(e-5)) is shifted left
// by e + 19; for -24 <= e < -19 the shift is to the right and the low bits
// are truncated. Products with e < -24 lie below the accumulator's range and
// contribute zero (flagged as underflow). Products with e > 12 lie above
// f_max and are flagged as infinite, as is an infinite product. The aligned
// magnitude is negated for negative products.
//
// Alignment and range [f_min^2, f_max] follow the paper; truncation of the
// bits below 2^-24 and treating e > 12 as infinity are this design's choice.
module kulisch_shifter
  import elma_pkg::*;
(
  input  log_prod_t        prod,
  input  logic [ALPHA-1:0] p,
  input  bias_t            bias,
  output acc_t             term,
  output logic             term_inf,
  output logic             underflow
);

  localparam int unsigned WIDE = ACC_W + ALPHA;        // room for right shifts
  localparam logic signed [7:0] EMAX = 8'(MAXEXP);     // f_max = 2^12
  localparam logic signed [7:0] EMIN = -8'(ACC_FRAC);  // f_min^2 = 2^-24

  logic signed [7:0]      e;
  logic [WIDE-1:0]        wide;
  logic [ACC_W-1:0]       mag;
  logic [5:0]             sh;

  always_comb begin
    e         = 8'(prod.m) + 8'(bias);
    term_inf  = prod.inf || (!prod.zero && e > EMAX);
    underflow = !prod.zero && !prod.inf && e < EMIN;
    sh        = 6'(e - EMIN);                  // 0 .. 36 when in range
    wide      = WIDE'({1'b1, p}) << sh;
    mag       = wide[WIDE-1:ALPHA];
    if (prod.zero || term_inf || underflow) mag = '0;
    term      = prod.sign ? -acc_t'(mag) : acc_t'(mag);
  end

endmodule
