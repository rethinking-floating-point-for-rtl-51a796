// tb_resnet_conv_tile: one 32 x 32 output tile of the deepest ResNet-50
// inner product, a 3x3 convolution over 512 input channels (K = 4,608), on
// the default-size array. Activations are ReLU outputs |N(0,1)| and weights
// N(0, sqrt(2/4608)) (He initialisation for that fan-in), each rounded to
// the 8-bit log format. All 1,024 results are compared with the reference
// model, and the accept rate (one slice per cycle) and the latency are
// checked.
module tb_resnet_conv_tile;
  import elma_pkg::*;
  import elma_ref_pkg::*;
  localparam int DIM = 32;
  localparam int K = 4608;

  logic clk = 0, rst_n = 0;
  bias_t bias_in = 0, bias_out = 0;
  logic in_valid, in_last, in_ready, out_valid, busy, ev_underflow, ev_overflow;
  logic [4:0] out_row;
  word_t a_col [DIM], b_row [DIM], c_row [DIM];
  bit [7:0] A [DIM][K], B [K][DIM];
  int checks = 0, failures = 0, cyc = 0, first_cyc = 0, last_cyc = 0, rows = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  elma_gemm_top dut (.clk, .rst_n, .bias_in, .bias_out, .in_valid, .in_last, .in_ready,
    .a_col, .b_row, .out_valid, .out_row, .c_row, .busy, .ev_underflow, .ev_overflow);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    real w_sd, x;
    longint s, t;
    bit inf, tinf, tuf;
    bit [7:0] e;
    w_sd = $sqrt(2.0 / K);
    for (int k = 0; k < K; k++)
      for (int i = 0; i < DIM; i++) begin
        x = ref_gauss();
        A[i][k] = ref_from_real(x < 0.0 ? -x : x);
        B[k][i] = ref_from_real(ref_gauss() * w_sd);
      end
    in_valid = 0; in_last = 0;
    for (int i = 0; i < DIM; i++) begin a_col[i] = 0; b_row[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int k = 0; k < K; k++) begin
      @(negedge clk);
      in_valid = 1; in_last = (k == K - 1);
      for (int i = 0; i < DIM; i++) begin a_col[i] = A[i][k]; b_row[i] = B[k][i]; end
      @(posedge clk);
      if (!in_ready) failures++;
      if (k == 0) first_cyc = cyc;
      last_cyc = cyc;
    end
    @(negedge clk);
    in_valid = 0; in_last = 0;
    checks++;
    if (last_cyc - first_cyc != K - 1) begin failures++; $display("FAIL accept rate"); end
    while (rows < DIM) begin
      @(posedge clk);
      if (out_valid) begin
        if (rows == 0) begin
          checks++;
          if (cyc - last_cyc != 2 * DIM + 1) begin failures++; $display("FAIL latency"); end
        end
        for (int j = 0; j < DIM; j++) begin
          s = 0; inf = 0;
          for (int k = 0; k < K; k++) begin
            t = ref_term(A[out_row][k], B[k][j], 0, tinf, tuf);
            s += t; inf |= tinf;
            if (s > ACC_MAX || s < ACC_MIN) inf = 1;
          end
          e = ref_convert(s, inf, 0);
          checks++;
          if (c_row[j] != e) begin
            failures++;
            if (failures < 10) $display("FAIL C[%0d][%0d] got %02h exp %02h", out_row, j, c_row[j], e);
          end
        end
        rows++;
      end
    end
    $display("tile done at cycle %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
