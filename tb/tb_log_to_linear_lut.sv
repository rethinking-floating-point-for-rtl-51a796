// tb_log_to_linear_lut: checks all 16 entries of r(p(f)) against
// round(32 * (2^(f/16) - 1)) computed with real arithmetic.
module tb_log_to_linear_lut;
  import elma_pkg::*;
  import elma_ref_pkg::*;

  logic [FBITS-1:0] f;
  logic [ALPHA-1:0] p;
  int checks = 0, failures = 0;

  log_to_linear_lut dut (.f(f), .p(p));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 16; i++) begin
      f = 4'(i);
      #1;
      checks++;
      if (int'(p) != ref_plut(i)) begin
        failures++;
        $display("FAIL f=%0d p=%0d exp %0d", i, p, ref_plut(i));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
