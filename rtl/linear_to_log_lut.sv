// linear_to_log_lut: the r(q(g)) table, q(g) = log2(1 + g).
//
// Combinational 32 x 7-bit lookup. The 5-bit linear fraction g (value g/32,
// already rounded to beta = 5 bits) selects q = round(128 * log2(1 + g/32)),
// round to nearest, a log fraction with gamma = 7 bits. The largest entry is
// 125/128, so no entry carries into the exponent. Sizes follow the paper;
// the entries are computed from the formula above.
module linear_to_log_lut
  import elma_pkg::*;
(
  input  logic [BETA-1:0]  g,
  output logic [GAMMA-1:0] q
);

  always_comb begin
    unique case (g)
      5'd0:  q = 7'd0;
      5'd1:  q = 7'd6;
      5'd2:  q = 7'd11;
      5'd3:  q = 7'd17;
      5'd4:  q = 7'd22;
      5'd5:  q = 7'd27;
      5'd6:  q = 7'd32;
      5'd7:  q = 7'd37;
      5'd8:  q = 7'd41;
      5'd9:  q = 7'd46;
      5'd10: q = 7'd50;
      5'd11: q = 7'd55;
      5'd12: q = 7'd59;
      5'd13: q = 7'd63;
      5'd14: q = 7'd67;
      5'd15: q = 7'd71;
      5'd16: q = 7'd75;
      5'd17: q = 7'd79;
      5'd18: q = 7'd82;
      5'd19: q = 7'd86;
      5'd20: q = 7'd90;
      5'd21: q = 7'd93;
      5'd22: q = 7'd97;
      5'd23: q = 7'd100;
      5'd24: q = 7'd103;
      5'd25: q = 7'd107;
      5'd26: q = 7'd110;
      5'd27: q = 7'd113;
      5'd28: q = 7'd116;
      5'd29: q = 7'd119;
      5'd30: q = 7'd122;
      default: q = 7'd125;
    endcase
  end

endmodule
