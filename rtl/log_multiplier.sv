// log_multiplier: log-domain multiply, log2(xy) = log2(x) + log2(y).
//
// Combinational. The two operands' logs m.f are concatenated into 9-bit
// signed fixed-point numbers {m, f} and added in one 9-bit adder; the sum
// keeps a 10th bit so that the product's m (range -24..25) cannot overflow.
// The sign is the XOR of the operand signs. Zero times anything finite is
// zero; infinity times anything, zero included, is infinity (posits have no
// NaN, the single infinity point stands for it).
//
// The 9-bit adder with an extra product exponent bit is the paper's; the
// zero/infinity rules are this design's choice.
module log_multiplier
  import elma_pkg::*;
(
  input  log_num_t  a,
  input  log_num_t  b,
  output log_prod_t prod
);

  localparam int unsigned LW = EXPW + FBITS;   // 9-bit log operand

  logic signed [LW-1:0] la, lb;
  logic signed [LW:0]   lp;

  always_comb begin
    la = {a.m, a.f};
    lb = {b.m, b.f};
    lp = (LW+1)'(la) + (LW+1)'(lb);
    prod.sign = a.sign ^ b.sign;
    prod.inf  = a.inf | b.inf;
    prod.zero = (a.zero | b.zero) & ~prod.inf;
    prod.m    = lp[LW:FBITS];
    prod.f    = lp[FBITS-1:0];
    if (prod.inf || prod.zero) begin
      prod.sign = 1'b0;
      prod.m    = '0;
      prod.f    = '0;
    end
  end

endmodule
