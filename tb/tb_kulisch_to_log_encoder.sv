// tb_kulisch_to_log_encoder: accumulator-to-word conversion.
//  * identity: for every finite non-zero word x, the accumulator holding
//    x * 1.0 must convert back to x (the paper's log-linear-log identity);
//  * random accumulators of all magnitudes and random output biases against
//    the reference conversion (integer rounding, real-valued q table,
//    nearest-word search);
//  * zero, infinity and saturation at both ends of the range.
module tb_kulisch_to_log_encoder;
  import elma_pkg::*;
  import elma_ref_pkg::*;

  acc_t  acc;
  logic  acc_inf;
  bias_t bias_out;
  word_t word;
  int checks = 0, failures = 0, n_sat = 0;

  kulisch_to_log_encoder dut (.acc(acc), .acc_inf(acc_inf), .bias_out(bias_out), .word(word));

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_acc(input longint a, input bit inf, input int b);
    bit [7:0] exp_w;
    acc = acc_t'(a); acc_inf = inf; bias_out = 6'(b);
    #1;
    exp_w = ref_convert(a, inf, b);
    checks++;
    if (exp_w == 8'h7f || exp_w == 8'h81 || exp_w == 8'h01 || exp_w == 8'hff) n_sat++;
    if (word != exp_w) begin
      failures++;
      if (failures < 10) $display("FAIL acc=%0d inf=%0d bias=%0d: got %02h exp %02h", a, inf, b, word, exp_w);
    end
  endtask

  initial begin
    bit tinf, tuf;
    longint t, a;
    // identity x * 1.0 -> x
    for (int c = 0; c < 256; c++) begin
      if (c == 0 || c == 128) continue;
      t = ref_term(8'(c), 8'h40, 0, tinf, tuf);
      acc = acc_t'(t); acc_inf = 0; bias_out = 0;
      #1;
      checks++;
      if (word != 8'(c)) begin
        failures++;
        $display("FAIL identity %02h -> %02h", c, word);
      end
    end
    for (int i = 0; i < 20000; i++) begin
      a = {$urandom, $urandom};
      a = a >>> (26 + ($urandom % 38));
      check_acc(a, 0, (i % 3 == 0) ? int'($urandom % 33) - 16 : 0);
    end
    check_acc(0, 0, 0);
    check_acc(12345, 1, 0);
    check_acc((64'sd1 <<< 37) - 1, 0, 0);     // above 2^12: saturates
    check_acc(-(64'sd1 <<< 37), 0, 0);
    check_acc(1, 0, 0);                       // 2^-24: saturates to minpos
    check_acc(-1, 0, 0);
    check_acc(64'sd1 <<< 28, 0, -4);          // 16.0 with n = -4 gives 1.0
    checks++; if (word != 8'h40) failures++;
    if (n_sat == 0) failures++;
    $display("saturated cases %0d", n_sat);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
