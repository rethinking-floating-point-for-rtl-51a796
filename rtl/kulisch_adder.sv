// kulisch_adder: 38-bit Kulisch accumulator adder.
//
// Combinational. sum = (first ? 0 : acc) + term, in two's complement. With
// no rounding the sum is exact, so the order of the products does not
// matter. Two's-complement overflow (operands of equal sign, result of the
// other sign) means the sum left [-f_max, f_max]; it, an infinite addend or
// an accumulator that is already infinite sets the sticky infinity flag,
// which the output encoder turns into the infinity code.
//
// The exact fixed-point add is the paper's; the sticky infinity flag for
// overflow is this design's choice (the paper does not say what overflow
// does).
module kulisch_adder
  import elma_pkg::*;
(
  input  acc_t acc,
  input  logic acc_inf,
  input  acc_t term,
  input  logic term_inf,
  input  logic first,
  output acc_t sum,
  output logic sum_inf,
  output logic overflow
);

  acc_t base;

  always_comb begin
    base     = first ? '0 : acc;
    sum      = base + term;
    overflow = (base[ACC_W-1] == term[ACC_W-1]) && (sum[ACC_W-1] != base[ACC_W-1]);
    sum_inf  = (acc_inf && !first) || term_inf || overflow;
  end

endmodule
