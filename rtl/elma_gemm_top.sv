// elma_gemm_top: 32 x 32 matrix-multiply array with (8,1,5,5,7) log ELMA
// arithmetic, C = A * B with A of DIM x K and B of K x DIM, K unbounded.
//
// Data path, left to right:
//   * each cycle a k-slice enters: column k of A (a_col, one word per row)
//     and row k of B (b_row, one word per column), with in_valid/in_ready
//     handshake and in_last on the final slice;
//   * two skew_buffers delay lane i by i cycles; A's lanes carry the valid
//     and first-of-sum flags with the word;
//   * 64 posit_log_decoders (DIM for A, DIM for B) decode the words at the
//     array edge;
//   * the systolic_array of elma_pe accumulates C in place in 38-bit Kulisch
//     accumulators;
//   * after the drain, the accumulators shift down the columns and DIM
//     kulisch_to_log_encoders at the bottom edge convert one row of C per
//     cycle to 8-bit words, registered into c_row with out_valid and out_row
//     (rows leave last row first).
// bias_in is the input exponent bias m added to every product exponent and
// bias_out the output exponent bias n added when converting; both are
// sampled with the first slice of a GEMM and apply to the whole GEMM. ev_underflow / ev_overflow pulse when some PE drops
// a product below 2^-24 or overflows its accumulator range.
//
// Timing: one k-slice per cycle; the first result row appears 2*DIM+1 cycles
// after the cycle the last slice is accepted, the last DIM-1 cycles later;
// in_ready is low from the last slice until the last row is out.
//
// The array size, stationary C, 64 input decoders and 32 boundary encoders
// are the paper's; the handshake, skewing and schedule are this design's.
module elma_gemm_top
  import elma_pkg::*;
#(
  parameter int unsigned DIM = 32
) (
  input  logic  clk,
  input  logic  rst_n,
  input  bias_t bias_in,
  input  bias_t bias_out,
  input  logic  in_valid,
  input  logic  in_last,
  output logic  in_ready,
  input  word_t a_col [DIM],
  input  word_t b_row [DIM],
  output logic  out_valid,
  output logic [$clog2(DIM)-1:0] out_row,
  output word_t c_row [DIM],
  output logic  busy,
  output logic  ev_underflow,
  output logic  ev_overflow
);

  logic feed_valid, feed_first, shift_en;
  bias_t bias_in_q, bias_out_q;

  // both biases are captured with the first slice of a GEMM and held until
  // the next GEMM starts, i.e. through that GEMM's shift-out
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      bias_in_q  <= '0;
      bias_out_q <= '0;
    end else if (feed_first) begin
      bias_in_q  <= bias_in;
      bias_out_q <= bias_out;
    end
  end

  gemm_controller #(.DIM(DIM)) u_ctrl (
    .clk, .rst_n, .in_valid, .in_last, .in_ready,
    .feed_valid, .feed_first, .shift_en,
    .out_valid, .out_row, .busy
  );

  logic [N+1:0] a_lane [DIM];
  logic [N+1:0] a_skew [DIM];
  logic [N-1:0] b_lane [DIM];
  logic [N-1:0] b_skew [DIM];

  for (genvar i = 0; i < DIM; i++) begin : g_in
    assign a_lane[i] = {feed_valid, feed_first, a_col[i]};
    assign b_lane[i] = b_row[i];
  end

  skew_buffer #(.LANES(DIM), .W(N+2)) u_skew_a (.clk, .rst_n, .din(a_lane), .dout(a_skew));
  skew_buffer #(.LANES(DIM), .W(N))   u_skew_b (.clk, .rst_n, .din(b_lane), .dout(b_skew));

  log_num_t a_dec [DIM];
  log_num_t b_dec [DIM];
  logic     v_dec [DIM];
  logic     f_dec [DIM];

  for (genvar i = 0; i < DIM; i++) begin : g_dec
    posit_log_decoder u_dec_a (.word(a_skew[i][N-1:0]), .num(a_dec[i]));
    posit_log_decoder u_dec_b (.word(b_skew[i]),        .num(b_dec[i]));
    assign v_dec[i] = a_skew[i][N+1];
    assign f_dec[i] = a_skew[i][N];
  end

  acc_t acc_bottom [DIM];
  logic inf_bottom [DIM];

  systolic_array #(.DIM(DIM)) u_array (
    .clk, .rst_n, .bias_in(bias_in_q),
    .a_left(a_dec), .valid_left(v_dec), .first_left(f_dec), .b_top(b_dec),
    .shift_en,
    .acc_bottom, .inf_bottom,
    .any_underflow(ev_underflow), .any_overflow(ev_overflow)
  );

  word_t c_next [DIM];

  for (genvar j = 0; j < DIM; j++) begin : g_out
    kulisch_to_log_encoder u_conv (
      .acc(acc_bottom[j]), .acc_inf(inf_bottom[j]), .bias_out(bias_out_q), .word(c_next[j])
    );
    always_ff @(posedge clk) begin
      if (!rst_n)        c_row[j] <= WORD_ZERO;
      else if (shift_en) c_row[j] <= c_next[j];
    end
  end

endmodule
