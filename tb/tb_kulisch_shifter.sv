// tb_kulisch_shifter: random products, linear fractions and input biases.
// The expected addend is (32 + p) * 2^(e + 19) in units of 2^-24, computed
// with integer multiply/divide (truncating toward zero), negated for negative
// products; e > 12 must flag infinity and e < -24 underflow.
module tb_kulisch_shifter;
  import elma_pkg::*;

  log_prod_t        prod;
  logic [ALPHA-1:0] p;
  bias_t            bias;
  acc_t             term;
  logic             term_inf, underflow;
  int checks = 0, failures = 0;
  int n_inf = 0, n_uf = 0, n_norm = 0;

  kulisch_shifter dut (.prod(prod), .p(p), .bias(bias), .term(term),
                       .term_inf(term_inf), .underflow(underflow));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_one(input int m, input int pv, input int bv, input bit s,
                           input bit z, input bit inf);
    longint mag, exp_t;
    int e;
    bit exp_inf, exp_uf;
    prod.m = 6'(m); prod.f = 4'($urandom); prod.sign = s; prod.zero = z; prod.inf = inf;
    p = 5'(pv); bias = 6'(bv);
    #1;
    e = m + bv;
    exp_inf = inf || (!z && e > 12);
    exp_uf  = !z && !inf && e < -24;
    mag = 0;
    if (!z && !exp_inf && !exp_uf) begin
      mag = 64'(32 + pv);
      if (e + 19 >= 0) mag = mag * (64'sd1 <<< (e + 19));
      else             mag = mag / (64'sd1 <<< (-(e + 19)));
    end
    exp_t = s ? -mag : mag;
    checks++;
    if (exp_inf) n_inf++; else if (exp_uf) n_uf++; else n_norm++;
    if (term_inf != exp_inf || underflow != exp_uf || longint'(term) != exp_t) begin
      failures++;
      if (failures < 10)
        $display("FAIL m=%0d p=%0d bias=%0d s=%0d: got %0d inf%0d uf%0d exp %0d inf%0d uf%0d",
                 m, pv, bv, s, term, term_inf, underflow, exp_t, exp_inf, exp_uf);
    end
  endtask

  initial begin
    for (int m = -26; m <= 25; m++)
      for (int pv = 0; pv < 32; pv += 7)
        check_one(m, pv, 0, pv[0], 0, 0);
    for (int i = 0; i < 5000; i++)
      check_one(int'($urandom % 52) - 26, int'($urandom % 32), int'($urandom % 17) - 8,
                1'($urandom), ($urandom % 20) == 0, ($urandom % 20) == 0);
    check_one(12, 31, 0, 0, 0, 0);    // largest in-range addend
    check_one(-24, 31, 0, 1, 0, 0);   // smallest: truncates to 1 LSB
    check_one(0, 0, -4, 0, 0, 0);     // bias moves 1.0 to 2^-4
    if (n_inf == 0 || n_uf == 0 || n_norm == 0) failures++;
    $display("cases: normal %0d overflow/inf %0d underflow %0d", n_norm, n_inf, n_uf);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
