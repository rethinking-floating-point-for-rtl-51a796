// log_to_linear_lut: the r(p(f)) table, p(f) = 2^f - 1.
//
// Combinational 16 x 5-bit lookup. The 4-bit log fraction f (value f/16)
// selects p = round(32 * (2^(f/16) - 1)), round to nearest; the linear
// significand of the product is then 1.p (6 bits). No entry rounds up to
// 1.0, the largest is 29/32. Table size and alpha = 5 follow the paper; the
// entries are computed from the formula above.
module log_to_linear_lut
  import elma_pkg::*;
(
  input  logic [FBITS-1:0] f,
  output logic [ALPHA-1:0] p
);

  always_comb begin
    unique case (f)
      4'd0:  p = 5'd0;
      4'd1:  p = 5'd1;
      4'd2:  p = 5'd3;
      4'd3:  p = 5'd4;
      4'd4:  p = 5'd6;
      4'd5:  p = 5'd8;
      4'd6:  p = 5'd9;
      4'd7:  p = 5'd11;
      4'd8:  p = 5'd13;
      4'd9:  p = 5'd15;
      4'd10: p = 5'd17;
      4'd11: p = 5'd20;
      4'd12: p = 5'd22;
      4'd13: p = 5'd24;
      4'd14: p = 5'd27;
      default: p = 5'd29;
    endcase
  end

endmodule
