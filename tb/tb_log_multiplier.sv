// tb_log_multiplier: log multiply of all pairs of 256 words (65536 pairs).
// The expected product log is the integer sum of the reference decodes in
// 1/16 units; zero and infinity follow the posit rules (inf dominates).
module tb_log_multiplier;
  import elma_pkg::*;
  import elma_ref_pkg::*;

  log_num_t  a, b;
  log_prod_t prod;
  word_t     wa, wb;
  int checks = 0, failures = 0;

  posit_log_decoder da (.word(wa), .num(a));
  posit_log_decoder db (.word(wb), .num(b));
  log_multiplier dut (.a(a), .b(b), .prod(prod));

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    ref_num_t ra, rb;
    int l, got;
    bit bad;
    for (int i = 0; i < 256; i++) begin
      for (int j = 0; j < 256; j++) begin
        wa = 8'(i); wb = 8'(j);
        #1;
        ra = ref_decode(8'(i)); rb = ref_decode(8'(j));
        checks++;
        bad = 0;
        if (ra.inf || rb.inf) bad = !prod.inf;
        else if (ra.zero || rb.zero) bad = !prod.zero || prod.inf;
        else begin
          l   = ra.m * 16 + ra.f + rb.m * 16 + rb.f;
          got = int'(prod.m) * 16 + int'(prod.f);
          bad = prod.zero || prod.inf || got != l || prod.sign != (ra.sign ^ rb.sign);
        end
        if (bad) begin
          failures++;
          if (failures < 10) $display("FAIL %02h * %02h: m=%0d f=%0d", i, j, prod.m, prod.f);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
