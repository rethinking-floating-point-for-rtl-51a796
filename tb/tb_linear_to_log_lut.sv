// tb_linear_to_log_lut: checks all 32 entries of r(q(g)) against
// round(128 * log2(1 + g/32)) computed with real arithmetic, and the
// round-trip identity f = r(q(r(p(f))), 4) for all 16 log fractions.
module tb_linear_to_log_lut;
  import elma_pkg::*;
  import elma_ref_pkg::*;

  logic [BETA-1:0]  g;
  logic [GAMMA-1:0] q;
  int checks = 0, failures = 0;

  linear_to_log_lut dut (.g(g), .q(q));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int back;
    for (int i = 0; i < 32; i++) begin
      g = 5'(i);
      #1;
      checks++;
      if (int'(q) != ref_qlut(i)) begin
        failures++;
        $display("FAIL g=%0d q=%0d exp %0d", i, q, ref_qlut(i));
      end
    end
    for (int f = 0; f < 16; f++) begin
      g = 5'(ref_plut(f));
      #1;
      back = (int'(q) + 4) / 8;              // nearest 1/16 (no ties occur)
      checks++;
      if (back != f) begin
        failures++;
        $display("FAIL round trip f=%0d -> %0d", f, back);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
