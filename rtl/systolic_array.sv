// systolic_array: DIM x DIM output-stationary grid of ELMA PEs.
//
// Row i receives decoded A operands (with valid and first-of-sum flags) at
// its left edge; they move one PE to the right per cycle. Column j receives
// decoded B operands at its top edge; they move one PE down per cycle. With
// skewed inputs, PE (i, j) accumulates C[i][j] = sum_k A[i][k] * B[k][j] in
// its own Kulisch accumulator. When shift_en is high every accumulator is
// replaced by the one above it (the top row loads zero), so over DIM cycles
// the rows of C leave at the bottom edge, last row first, into the output
// encoders. any_underflow / any_overflow OR the PEs' event flags.
//
// The 32 x 32 size, stationary C and shifting the Kulisch accumulators
// across the PEs are the paper's; the direction of flow is this design's.
module systolic_array
  import elma_pkg::*;
#(
  parameter int unsigned DIM = 32
) (
  input  logic     clk,
  input  logic     rst_n,
  input  bias_t    bias_in,
  input  log_num_t a_left     [DIM],
  input  logic     valid_left [DIM],
  input  logic     first_left [DIM],
  input  log_num_t b_top      [DIM],
  input  logic     shift_en,
  output acc_t     acc_bottom [DIM],
  output logic     inf_bottom [DIM],
  output logic     any_underflow,
  output logic     any_overflow
);

  // horizontal links: column index 0..DIM (DIM is the unused right edge)
  log_num_t a_h [DIM][DIM+1];
  logic     v_h [DIM][DIM+1];
  logic     f_h [DIM][DIM+1];
  // vertical links: row index 0..DIM
  log_num_t b_v   [DIM+1][DIM];
  acc_t     acc_v [DIM+1][DIM];   // acc_v[i][j] is the accumulator of PE (i-1, j)
  logic     inf_v [DIM+1][DIM];
  logic [DIM*DIM-1:0] uf, ov;

  for (genvar i = 0; i < DIM; i++) begin : g_edge
    assign a_h[i][0]  = a_left[i];
    assign v_h[i][0]  = valid_left[i];
    assign f_h[i][0]  = first_left[i];
    assign b_v[0][i]  = b_top[i];
    assign acc_v[0][i] = '0;
    assign inf_v[0][i] = 1'b0;
    assign acc_bottom[i] = acc_v[DIM][i];
    assign inf_bottom[i] = inf_v[DIM][i];
  end

  for (genvar i = 0; i < DIM; i++) begin : g_row
    for (genvar j = 0; j < DIM; j++) begin : g_col
      elma_pe u_pe (
        .clk         (clk),
        .rst_n       (rst_n),
        .bias_in     (bias_in),
        .a_in        (a_h[i][j]),
        .valid_in    (v_h[i][j]),
        .first_in    (f_h[i][j]),
        .b_in        (b_v[i][j]),
        .a_out       (a_h[i][j+1]),
        .valid_out   (v_h[i][j+1]),
        .first_out   (f_h[i][j+1]),
        .b_out       (b_v[i+1][j]),
        .shift_en    (shift_en),
        .acc_in      (acc_v[i][j]),
        .acc_inf_in  (inf_v[i][j]),
        .acc_out     (acc_v[i+1][j]),
        .acc_inf_out (inf_v[i+1][j]),
        .ev_underflow(uf[i*DIM+j]),
        .ev_overflow (ov[i*DIM+j])
      );
    end
  end

  assign any_underflow = |uf;
  assign any_overflow  = |ov;

endmodule
