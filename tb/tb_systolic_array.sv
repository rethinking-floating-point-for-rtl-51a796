// tb_systolic_array: a 4 x 4 array computes random GEMMs (K from 1 to 24)
// from decoded operands that the testbench skews itself (row i and column
// j delayed by i and j cycles). After the wavefront has passed, the
// accumulators are shifted out of the bottom edge over DIM cycles, last row
// first, and compared with reference Kulisch sums. Back-to-back GEMMs check
// that the first-of-sum flag restarts every accumulator.
module tb_systolic_array;
  import elma_pkg::*;
  import elma_ref_pkg::*;
  localparam int DIM = 4;
  localparam int KMAX = 24;

  logic clk = 0, rst_n = 0;
  bias_t bias_in;
  log_num_t a_left [DIM], b_top [DIM];
  logic valid_left [DIM], first_left [DIM];
  logic shift_en, any_underflow, any_overflow;
  acc_t acc_bottom [DIM];
  logic inf_bottom [DIM];
  word_t wa [DIM], wb [DIM];
  bit [7:0] A [DIM][KMAX], B [KMAX][DIM];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  for (genvar i = 0; i < DIM; i++) begin : g_dec
    posit_log_decoder da (.word(wa[i]), .num(a_left[i]));
    posit_log_decoder db (.word(wb[i]), .num(b_top[i]));
  end

  systolic_array #(.DIM(DIM)) dut (.clk, .rst_n, .bias_in, .a_left, .valid_left, .first_left,
    .b_top, .shift_en, .acc_bottom, .inf_bottom, .any_underflow, .any_overflow);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int K, kk;
    longint s, t;
    bit inf, tinf, tuf;
    for (int i = 0; i < DIM; i++) begin wa[i] = 0; wb[i] = 0; valid_left[i] = 0; first_left[i] = 0; end
    shift_en = 0; bias_in = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < 12; g++) begin
      K = 1 + ($urandom % KMAX);
      for (int i = 0; i < DIM; i++)
        for (int k = 0; k < K; k++) begin
          A[i][k] = 8'h28 + 8'($urandom % 48); B[k][i] = 8'h28 + 8'($urandom % 48);
          if ($urandom % 2 == 1) A[i][k] = 8'(-A[i][k]);
          if ($urandom % 2 == 1) B[k][i] = 8'(-B[k][i]);
          if (g == 5) A[i][k] = 8'($urandom);
        end
      for (int c = 0; c < K + 2 * DIM - 1; c++) begin
        @(negedge clk);
        for (int i = 0; i < DIM; i++) begin
          kk = c - i;
          valid_left[i] = (kk >= 0 && kk < K);
          first_left[i] = (kk == 0);
          wa[i] = valid_left[i] ? A[i][kk] : 8'h00;
          wb[i] = (kk >= 0 && kk < K) ? B[kk][i] : 8'h00;
        end
      end
      @(negedge clk);
      for (int i = 0; i < DIM; i++) valid_left[i] = 0;
      @(negedge clk);
      // shift out: bottom edge shows row DIM-1-r
      for (int r = 0; r < DIM; r++) begin
        for (int j = 0; j < DIM; j++) begin
          s = 0; inf = 0;
          for (int k = 0; k < K; k++) begin
            t = ref_term(A[DIM-1-r][k], B[k][j], 0, tinf, tuf);
            s += t; inf |= tinf;
            if (s > ACC_MAX || s < ACC_MIN) inf = 1;
          end
          checks++;
          if (inf_bottom[j] != inf || (!inf && longint'(acc_bottom[j]) != s)) begin
            failures++;
            if (failures < 10) $display("FAIL gemm %0d C[%0d][%0d] got %0d exp %0d", g, DIM-1-r, j, acc_bottom[j], s);
          end
        end
        shift_en = 1;
        @(negedge clk);
        shift_en = 0;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
