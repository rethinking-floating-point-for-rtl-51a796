// tb_elma_pe: one PE through several dot products of random length.
// Operands are driven at the PE's inputs; a and b must reappear at a_out /
// b_out one cycle later, and after the last pair the accumulator must equal
// the reference Kulisch sum (exact 64-bit integer sum of the reference
// addends, infinity on overflow). Each sum's first pair restarts it. Then the
// accumulator is shifted out (acc_in -> acc_out) in one cycle.
module tb_elma_pe;
  import elma_pkg::*;
  import elma_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  bias_t bias_in;
  log_num_t a_in, b_in, a_out, b_out;
  logic valid_in, first_in, valid_out, first_out, shift_en, acc_inf_in, acc_inf_out;
  logic ev_underflow, ev_overflow;
  acc_t acc_in, acc_out;
  word_t wa, wb;
  int checks = 0, failures = 0, n_inf_sums = 0;

  always #5 clk = ~clk;

  posit_log_decoder da (.word(wa), .num(a_in));
  posit_log_decoder db (.word(wb), .num(b_in));

  elma_pe dut (.clk, .rst_n, .bias_in, .a_in, .valid_in, .first_in, .b_in,
               .a_out, .valid_out, .first_out, .b_out, .shift_en, .acc_in, .acc_inf_in,
               .acc_out, .acc_inf_out, .ev_underflow, .ev_overflow);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint s, t;
    bit inf, tinf, tuf;
    int len, bias;
    log_num_t a_prev;
    valid_in = 0; first_in = 0; shift_en = 0; acc_in = '0; acc_inf_in = 0;
    wa = 0; wb = 0; bias_in = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int sum_i = 0; sum_i < 200; sum_i++) begin
      len  = 1 + ($urandom % 40);
      bias = (sum_i % 5 == 0) ? int'($urandom % 9) - 4 : 0;
      bias_in = 6'(bias);
      s = 0; inf = 0;
      for (int k = 0; k < len; k++) begin
        @(negedge clk);
        wa = 8'($urandom); wb = 8'($urandom);
        if (sum_i % 3 == 0) begin wa = 8'h30 + 8'($urandom % 32); wb = 8'h30 + 8'($urandom % 32); end
        if (sum_i % 13 == 1) begin wa = 8'h7f; wb = 8'h7e; end   // overflow of range
        if ($urandom % 4 == 0) wa[7] = ~wa[7];
        valid_in = 1; first_in = (k == 0);
        t = ref_term(wa, wb, bias, tinf, tuf);
        s += t; inf |= tinf;
        if (s > ACC_MAX || s < ACC_MIN) inf = 1;
        #1 a_prev = a_in;
        @(negedge clk);
        checks++;
        if (a_out != a_prev) failures++;
        // bubble between pairs now and then
        valid_in = 0;
        if ($urandom % 3 != 0) @(negedge clk);
      end
      @(negedge clk); valid_in = 0; first_in = 0;
      @(negedge clk);
      checks++;
      if (inf) n_inf_sums++;
      if (acc_inf_out != inf || (!inf && longint'(acc_out) != s)) begin
        failures++;
        if (failures < 10) $display("FAIL sum %0d: got %0d inf%0d exp %0d inf%0d", sum_i, acc_out, acc_inf_out, s, inf);
      end
    end
    // shift: load acc_in in one cycle
    @(negedge clk);
    acc_in = acc_t'(64'sd123456789); acc_inf_in = 0; shift_en = 1;
    @(negedge clk); shift_en = 0;
    checks++;
    if (acc_out != acc_t'(64'sd123456789) || acc_inf_out) failures++;
    if (n_inf_sums == 0) failures++;
    $display("sums with infinity %0d", n_inf_sums);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
