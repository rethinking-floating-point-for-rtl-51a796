// kulisch_to_log_encoder: converts a Kulisch accumulator to an 8-bit
// (8,1,5,5,7) posit-tapered log word.
//
// Combinational, one per column at the array's output edge. Steps:
//   1. sign and magnitude of the 38-bit two's-complement accumulator;
//   2. leading-one position P of the magnitude; the linear exponent is
//      E = P - 24 (the accumulator LSB weighs 2^-24);
//   3. normalising shift, then the linear fraction g below the leading one
//      is rounded to beta = 5 bits, nearest-even with an OR-reduced sticky
//      bit; a round-up to 2.0 bumps E and clears g;
//   4. the r(q(g)) table gives the 7-bit log fraction q = log2(1+g);
//   5. the output exponent bias n is added to E (a small adder);
//   6. posit_log_encoder tapers and rounds to the 8-bit word.
// A zero accumulator gives the zero word, an infinite one (sticky overflow
// flag) the infinity word.
//
// The conversion chain (LZ count, shift, r(g, beta), q table, bias n, taper
// encode) is the paper's; doing it in one combinational stage is this
// design's choice.
module kulisch_to_log_encoder
  import elma_pkg::*;
(
  input  acc_t  acc,
  input  logic  acc_inf,
  input  bias_t bias_out,
  output word_t word
);

  localparam int unsigned GW = ACC_W - 1;          // fraction bits below the lead

  logic [ACC_W-1:0]  mag, norm;
  int unsigned       lead;
  logic [BETA-1:0]   g5, g;
  logic              guard, sticky, up;
  logic signed [7:0] e_lin, e_out;
  logic [GAMMA-1:0]  q;
  logic              is_zero;

  always_comb begin
    mag  = acc[ACC_W-1] ? (~acc + ACC_W'(1)) : acc;
    lead = 0;
    for (int i = 0; i < ACC_W; i++) if (mag[i]) lead = i;
    is_zero = (mag == '0);
    norm    = mag << (ACC_W - 1 - lead);
    g5      = norm[GW-1 -: BETA];
    guard   = norm[GW-1-BETA];
    sticky  = |norm[GW-2-BETA:0];
    up      = guard & (sticky | g5[0]);
    g       = g5 + BETA'(up);
    e_lin   = 8'(signed'(lead)) - 8'(ACC_FRAC);
    if (up && g5 == '1) e_lin = e_lin + 8'sd1;
    e_out   = e_lin + 8'(bias_out);
  end

  linear_to_log_lut u_qlut (.g(g), .q(q));

  posit_log_encoder u_enc (
    .sign (acc[ACC_W-1]),
    .zero (is_zero),
    .inf  (acc_inf),
    .e    (e_out),
    .q    (q),
    .word (word)
  );

endmodule
