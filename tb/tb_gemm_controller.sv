// tb_gemm_controller: DIM = 4. Feeds GEMMs of several lengths with bubbles
// and checks: in_ready only in the feed phase, first-of-sum on the first
// accepted slice only, a drain of 2*DIM-1 cycles after in_last, exactly DIM
// shift cycles, out_valid one cycle after each shift with rows DIM-1..0.
module tb_gemm_controller;
  localparam int DIM = 4;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_last, in_ready, feed_valid, feed_first, shift_en, out_valid, busy;
  logic [1:0] out_row;
  int checks = 0, failures = 0, n_stall = 0;

  always #5 clk = ~clk;

  gemm_controller #(.DIM(DIM)) dut (.clk, .rst_n, .in_valid, .in_last, .in_ready,
    .feed_valid, .feed_first, .shift_en, .out_valid, .out_row, .busy);

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic expect1(input bit cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  initial begin
    int len, acc_n, c, rows;
    in_valid = 0; in_last = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int g = 0; g < 5; g++) begin
      len = 1 + g * 3;
      acc_n = 0;
      while (acc_n < len) begin
        @(negedge clk);
        in_valid = ($urandom % 3) != 0;
        in_last  = in_valid && (acc_n == len - 1);
        #1;
        expect1(in_ready, "in_ready in feed");
        expect1(feed_valid == in_valid, "feed_valid");
        expect1(feed_first == (in_valid && acc_n == 0), "feed_first");
        if (in_valid) acc_n++;
      end
      // after the last slice: drain then shift
      c = 0; rows = 0;
      @(negedge clk); in_valid = 0; in_last = 0;
      while (!shift_en) begin
        expect1(!in_ready, "in_ready low in drain");
        n_stall++;
        c++; @(negedge clk);
      end
      expect1(c == 2 * DIM - 1, "drain length");
      while (shift_en) begin
        expect1(!in_ready, "in_ready low in shift");
        @(negedge clk);
        expect1(out_valid && out_row == 2'(DIM - 1 - rows), "out row order");
        rows++;
      end
      expect1(rows == DIM, "shift length");
      expect1(in_ready && !shift_en, "back to feed");
    end
    if (n_stall == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
