// tb_skew_buffer: random data into an 6-lane skew buffer; lane i must show
// the value that entered it exactly i cycles earlier.
module tb_skew_buffer;
  localparam int L = 6;
  logic clk = 0, rst_n = 0;
  logic [7:0] din [L], dout [L];
  logic [7:0] hist [64][L];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  skew_buffer #(.LANES(L), .W(8)) dut (.clk, .rst_n, .din, .dout);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < L; i++) din[i] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < 64; c++) begin
      @(negedge clk);
      for (int i = 0; i < L; i++) begin din[i] = 8'($urandom); hist[c][i] = din[i]; end
      #1;
      for (int i = 0; i < L; i++) begin
        if (c >= i) begin
          checks++;
          if (dout[i] != hist[c-i][i]) begin
            failures++;
            $display("FAIL cycle %0d lane %0d got %02h exp %02h", c, i, dout[i], hist[c-i][i]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
