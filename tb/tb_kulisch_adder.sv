// tb_kulisch_adder: random 38-bit accumulators and addends, with and
// without the first-of-sum flag. The expected sum is computed in 64-bit
// arithmetic; a result outside [-2^37, 2^37-1] must raise overflow and the
// infinity flag, which is also sticky from either input.
module tb_kulisch_adder;
  import elma_pkg::*;

  acc_t acc, term, sum;
  logic acc_inf, term_inf, first, sum_inf, overflow;
  int checks = 0, failures = 0, n_ovf = 0;

  kulisch_adder dut (.acc(acc), .acc_inf(acc_inf), .term(term), .term_inf(term_inf),
                     .first(first), .sum(sum), .sum_inf(sum_inf), .overflow(overflow));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic longint rnd38(input int scale);
    longint v = {$urandom, $urandom};
    v = v >>> (26 + ($urandom % scale));    // 38 bits down to small values
    return v;
  endfunction

  initial begin
    longint a, t, s;
    bit ov, exp_inf;
    for (int i = 0; i < 20000; i++) begin
      a = rnd38(30); t = rnd38(30);
      if (i % 7 == 0) begin a = (64'sd1 <<< 37) - 1 - 64'($urandom % 16); t = 64'($urandom % 64); end
      if (i % 11 == 0) begin a = -(64'sd1 <<< 37) + 64'($urandom % 16); t = -64'($urandom % 64); end
      acc = acc_t'(a); term = acc_t'(t);
      acc_inf = ($urandom % 16) == 0; term_inf = ($urandom % 16) == 0; first = ($urandom % 4) == 0;
      #1;
      s  = (first ? 0 : a) + t;
      ov = s > (64'sd1 <<< 37) - 1 || s < -(64'sd1 <<< 37);
      exp_inf = (acc_inf && !first) || term_inf || ov;
      if (ov) n_ovf++;
      checks++;
      if (overflow != ov || sum_inf != exp_inf || (!ov && longint'(sum) != s)) begin
        failures++;
        if (failures < 10) $display("FAIL a=%0d t=%0d first=%0d: sum=%0d ov=%0d", a, t, first, sum, overflow);
      end
    end
    if (n_ovf == 0) failures++;
    $display("overflow cases %0d", n_ovf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
