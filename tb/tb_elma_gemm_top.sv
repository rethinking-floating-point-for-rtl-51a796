// tb_elma_gemm_top: end-to-end test of the 32 x 32 ELMA GEMM array at its
// default size. Four GEMMs run back to back:
//   0. K = 128, A and B drawn from N(0,1) and rounded to 8-bit log words,
//      with random input bubbles;
//   1. K = 64, A scaled by 16, output exponent bias n = -4;
//   2. K = 16, rows chosen to overflow (-> infinity), to fall below the
//      accumulator range with input exponent bias m = -2 (underflow), to be
//      zero, to contain an infinite operand, plus random words;
//   3. K = 1.
// Every C word is compared with the reference model (exact Kulisch sum of
// reference addends, then reference conversion). The testbench also checks
// one accepted slice per cycle while in_valid is high, the latency from the
// last slice to the first result row (2*DIM+1 cycles), the row order, and
// that each mechanism happened: bubbles, back-pressure stalls, underflow,
// overflow, infinite, zero, saturated and negative results, both biases.
module tb_elma_gemm_top;
  import elma_pkg::*;
  import elma_ref_pkg::*;
  localparam int DIM = 32;
  localparam int KMAX = 128;
  localparam int NG = 4;

  logic clk = 0, rst_n = 0;
  bias_t bias_in, bias_out;
  logic in_valid, in_last, in_ready, out_valid, busy, ev_underflow, ev_overflow;
  logic [4:0] out_row;
  word_t a_col [DIM], b_row [DIM], c_row [DIM];

  bit [7:0] A [NG][DIM][KMAX], B [NG][KMAX][DIM];
  bit [7:0] C [DIM][DIM];
  int K_of [NG];
  int bin_of [NG], bout_of [NG];
  int checks = 0, failures = 0;
  int cyc = 0, last_accept_cyc = 0, rows_seen = 0, gemm_done = 0;
  int n_bubble = 0, n_stall = 0, n_uf = 0, n_ov = 0, n_inf = 0, n_zero = 0, n_sat = 0, n_neg = 0;
  int n_bias_in = 0, n_bias_out = 0;

  always #5 clk = ~clk;

  elma_gemm_top dut (.clk, .rst_n, .bias_in, .bias_out, .in_valid, .in_last, .in_ready,
    .a_col, .b_row, .out_valid, .out_row, .c_row, .busy, .ev_underflow, .ev_overflow);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (rst_n) begin
      if (ev_underflow) n_uf++;
      if (ev_overflow) n_ov++;
    end
  end

  task automatic make_gemm(input int g);
    int K;
    K = (g == 0) ? 128 : (g == 1) ? 64 : (g == 2) ? 16 : 1;
    K_of[g] = K;
    bin_of[g] = (g == 2) ? -2 : 0;
    bout_of[g] = (g == 1) ? -4 : 0;
    for (int k = 0; k < K; k++)
      for (int i = 0; i < DIM; i++) begin
        A[g][i][k] = ref_from_real(ref_gauss() * ((g == 1) ? 16.0 : 1.0));
        B[g][k][i] = ref_from_real(ref_gauss());
        if (g == 2) begin
          if (i < 4)       begin A[g][i][k] = 8'h7f; end                // 2^12 * B: overflow
          else if (i < 8)  begin A[g][i][k] = 8'h01 + 8'(k % 4); end    // ~2^-12 * B, m = -2
          else if (i == 8) begin A[g][i][k] = 8'h00; end
          else if (i == 9 && k == 3) A[g][i][k] = 8'h80;
          else if (i >= 16) A[g][i][k] = 8'($urandom);
          if (i >= 4 && i < 8) B[g][k][i] = 8'hff - 8'(k % 4);          // tiny negatives
        end
      end
  endtask

  // reference result of GEMM g, row i, column j
  function automatic bit [7:0] ref_c(input int g, input int i, input int j);
    longint s = 0, t;
    bit inf = 0, tinf, tuf;
    for (int k = 0; k < K_of[g]; k++) begin
      t = ref_term(A[g][i][k], B[g][k][j], bin_of[g], tinf, tuf);
      s += t; inf |= tinf;
      if (s > ACC_MAX || s < ACC_MIN) inf = 1;
    end
    return ref_convert(s, inf, bout_of[g]);
  endfunction

  // driver
  initial begin
    int k, first_cyc;
    in_valid = 0; in_last = 0; bias_in = 0; bias_out = 0;
    for (int i = 0; i < DIM; i++) begin a_col[i] = 0; b_row[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < NG; g++) begin
      make_gemm(g);
      @(negedge clk);
      bias_in = 6'(bin_of[g]); bias_out = 6'(bout_of[g]);
      if (bin_of[g] != 0) n_bias_in++;
      if (bout_of[g] != 0) n_bias_out++;
      k = 0; first_cyc = -1;
      while (k < K_of[g]) begin
        @(negedge clk);
        in_valid = !(g == 0 && ($urandom % 10) == 0);
        if (!in_valid) n_bubble++;
        in_last = in_valid && (k == K_of[g] - 1);
        for (int i = 0; i < DIM; i++) begin a_col[i] = A[g][i][k]; b_row[i] = B[g][k][i]; end
        @(posedge clk);
        // hold the slice while the array is still busy with the previous GEMM
        while (in_valid && !in_ready) begin
          n_stall++;
          @(posedge clk);
        end
        if (in_valid) begin
          checks++;
          if (first_cyc < 0) first_cyc = cyc;
          k++;
          last_accept_cyc = cyc;
        end
      end
      @(negedge clk);
      in_valid = 0; in_last = 0;
    end
  end

  // monitor
  initial begin
    bit [7:0] e;
    int g;
    for (g = 0; g < NG; g++) begin
      rows_seen = 0;
      while (rows_seen < DIM) begin
        @(posedge clk);
        if (out_valid) begin
          if (rows_seen == 0) begin
            checks++;
            if (cyc - last_accept_cyc != 2 * DIM + 1) begin
              failures++;
              $display("FAIL latency %0d", cyc - last_accept_cyc);
            end
          end
          checks++;
          if (int'(out_row) != DIM - 1 - rows_seen) begin failures++; $display("FAIL row order"); end
          for (int j = 0; j < DIM; j++) C[out_row][j] = c_row[j];
          rows_seen++;
        end
      end
      for (int i = 0; i < DIM; i++)
        for (int j = 0; j < DIM; j++) begin
          e = ref_c(g, i, j);
          checks++;
          if (C[i][j] == 8'h80) n_inf++;
          if (C[i][j] == 8'h00) n_zero++;
          if (C[i][j] == 8'h7f || C[i][j] == 8'h81 || C[i][j] == 8'h01 || C[i][j] == 8'hff) n_sat++;
          if (C[i][j][7] && C[i][j] != 8'h80) n_neg++;
          if (C[i][j] != e) begin
            failures++;
            if (failures < 20) $display("FAIL gemm %0d C[%0d][%0d] got %02h exp %02h", g, i, j, C[i][j], e);
          end
        end
      $display("gemm %0d (K=%0d) done at cycle %0d", g, K_of[g], cyc);
      gemm_done = g + 1;
    end
    $display("events: bubbles %0d stalls %0d underflow %0d overflow %0d inf %0d zero %0d saturated %0d negative %0d bias_in %0d bias_out %0d",
             n_bubble, n_stall, n_uf, n_ov, n_inf, n_zero, n_sat, n_neg, n_bias_in, n_bias_out);
    if (n_bubble == 0) begin failures++; $display("FAIL no bubble"); end
    if (n_stall == 0) begin failures++; $display("FAIL no stall"); end
    if (n_uf == 0) begin failures++; $display("FAIL no underflow"); end
    if (n_ov == 0) begin failures++; $display("FAIL no overflow"); end
    if (n_inf == 0) begin failures++; $display("FAIL no infinity"); end
    if (n_zero == 0) begin failures++; $display("FAIL no zero"); end
    if (n_sat == 0) begin failures++; $display("FAIL no saturation"); end
    if (n_neg == 0) begin failures++; $display("FAIL no negative"); end
    if (n_bias_in == 0 || n_bias_out == 0) begin failures++; $display("FAIL bias unused"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
