// posit_log_decoder: posit taper decoder for (8,1) posit-tapered log words.
//
// Combinational. A word is classified as zero (8'h00), infinity (8'h80) or
// finite. A negative finite word is two's-complemented first. In the
// remaining 7 bits the regime is a run of k equal bits starting at bit 6:
// a run of ones gives r = k-1, a run of zeros gives r = -k. After the run
// and its terminating bit come ES=1 exponent bit and then up to 4 fraction
// bits; bits cut off by a long regime read as zero. The result is
// m = 2*r + e and f, the value being +-2^(m + f/16).
//
// The posit decoding rule is the standard one the paper adopts; the array
// uses 64 of these, one per row of A and per column of B, at its edge.
module posit_log_decoder
  import elma_pkg::*;
(
  input  word_t    word,
  output log_num_t num
);

  logic [N-2:0]   body;    // magnitude bits below the sign
  logic [N-1:0]   absw;
  int unsigned    run;     // regime run length k
  logic [N-2:0]   rest;    // bits after regime and terminator, left aligned
  logic signed [EXPW-1:0] regime;

  always_comb begin
    absw = word[N-1] ? (~word + word_t'(1)) : word;
    body = absw[N-2:0];
    run  = 0;
    for (int i = N - 2; i >= 0; i--) begin
      if (body[i] == body[N-2] && run == (N - 2 - i)) run = run + 1;
    end
    // shift out the run and its terminator (the shift may exceed the width)
    rest = (run + 1 >= N - 1) ? '0 : (body << (run + 1));
    if (body[N-2]) regime = EXPW'(signed'(run)) - EXPW'(1);
    else           regime = -EXPW'(signed'(run));

    num.sign = word[N-1];
    num.zero = (word == WORD_ZERO);
    num.inf  = (word == WORD_INF);
    num.m    = (regime <<< ES) + EXPW'(rest[N-2 -: ES]);
    num.f    = rest[N-2-ES -: FBITS];
    if (num.zero || num.inf) begin
      num.sign = 1'b0;
      num.m    = '0;
      num.f    = '0;
    end
  end

endmodule
