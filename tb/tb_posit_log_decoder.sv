// tb_posit_log_decoder: exhaustive check of the posit taper decoder.
// All 256 words are decoded and compared field by field with the
// reference bit-string walk of elma_ref_pkg.
module tb_posit_log_decoder;
  import elma_pkg::*;
  import elma_ref_pkg::*;

  word_t    word;
  log_num_t num;
  int checks = 0, failures = 0;

  posit_log_decoder dut (.word(word), .num(num));

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_num_t r;
    for (int c = 0; c < 256; c++) begin
      word = 8'(c);
      #1;
      r = ref_decode(8'(c));
      checks++;
      if (num.zero != r.zero || num.inf != r.inf ||
          (!r.zero && !r.inf && (num.sign != r.sign || int'(num.m) != r.m || int'(num.f) != r.f))) begin
        failures++;
        $display("FAIL word %02h: got z%0d i%0d s%0d m%0d f%0d exp z%0d i%0d s%0d m%0d f%0d",
                 c, num.zero, num.inf, num.sign, num.m, num.f, r.zero, r.inf, r.sign, r.m, r.f);
      end
    end
    // range endpoints of the (8,1) posit: 2^12 and 2^-12
    word = 8'h7f; #1; checks++; if (num.m != 12 || num.f != 0) failures++;
    word = 8'h01; #1; checks++; if (num.m != -12 || num.f != 0) failures++;
    word = 8'h40; #1; checks++; if (num.m != 0 || num.f != 0 || num.sign) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
