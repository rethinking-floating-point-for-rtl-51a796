// elma_pe: exact log-linear multiply-add (ELMA) processing element of the
// output-stationary systolic array.
//
// Each cycle the PE registers a decoded A operand from its left neighbour
// (with its valid and first-of-sum flags) and a decoded B operand from the
// neighbour above, and passes both on unchanged one cycle later. From the
// registered pair it forms, in one cycle, the log product (log_multiplier),
// its linear significand (log_to_linear_lut), the aligned addend
// (kulisch_shifter) and the new accumulator value (kulisch_adder), which is
// written into the stationary 38-bit Kulisch accumulator when the pair is
// valid; the first valid pair of a sum replaces the old value.
//
// With shift_en high the accumulator and its infinity flag are loaded from
// the PE above instead (acc_in), which moves finished results down the
// column to the output encoders. Shifting and accumulating are exclusive;
// an assertion checks that no valid pair arrives while shifting.
//
// One multiply-add per cycle and the stationary, shifted-out accumulator
// are the paper's; the valid/first flags and this shift scheme are this
// design's choice. Synchronous active-low reset clears all state.
module elma_pe
  import elma_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  bias_t    bias_in,
  // operand flow
  input  log_num_t a_in,
  input  logic     valid_in,
  input  logic     first_in,
  input  log_num_t b_in,
  output log_num_t a_out,
  output logic     valid_out,
  output logic     first_out,
  output log_num_t b_out,
  // accumulator shift chain
  input  logic     shift_en,
  input  acc_t     acc_in,
  input  logic     acc_inf_in,
  output acc_t     acc_out,
  output logic     acc_inf_out,
  // event flags of the current multiply-add, for monitoring
  output logic     ev_underflow,
  output logic     ev_overflow
);

  log_num_t         a_q, b_q;
  logic             valid_q, first_q;
  acc_t             acc_q;
  logic             inf_q;

  log_prod_t        prod;
  logic [ALPHA-1:0] p;
  acc_t             term, sum;
  logic             term_inf, sum_inf, underflow, overflow;

  log_multiplier    u_mul (.a(a_q), .b(b_q), .prod(prod));
  log_to_linear_lut u_plut (.f(prod.f), .p(p));
  kulisch_shifter   u_shift (.prod(prod), .p(p), .bias(bias_in),
                             .term(term), .term_inf(term_inf), .underflow(underflow));
  kulisch_adder     u_add (.acc(acc_q), .acc_inf(inf_q), .term(term), .term_inf(term_inf),
                           .first(first_q), .sum(sum), .sum_inf(sum_inf), .overflow(overflow));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      a_q     <= LOG_ZERO;
      b_q     <= LOG_ZERO;
      valid_q <= 1'b0;
      first_q <= 1'b0;
      acc_q   <= '0;
      inf_q   <= 1'b0;
    end else begin
      a_q     <= a_in;
      b_q     <= b_in;
      valid_q <= valid_in;
      first_q <= first_in;
      if (shift_en) begin
        acc_q <= acc_in;
        inf_q <= acc_inf_in;
      end else if (valid_q) begin
        acc_q <= sum;
        inf_q <= sum_inf;
      end
    end
  end

  assign a_out        = a_q;
  assign b_out        = b_q;
  assign valid_out    = valid_q;
  assign first_out    = first_q;
  assign acc_out      = acc_q;
  assign acc_inf_out  = inf_q;
  assign ev_underflow = valid_q & underflow;
  assign ev_overflow  = valid_q & (overflow | (term_inf & ~prod.inf));

  a_no_shift_while_valid: assert property (@(posedge clk) disable iff (!rst_n)
    !(shift_en && valid_q));

endmodule
