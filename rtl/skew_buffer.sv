// skew_buffer: triangular delay line feeding one edge of the systolic array.
//
// Lane i of the LANES-wide input is delayed by exactly i clock cycles
// (lane 0 passes straight through), so that element k of row i of A and
// element k of column j of B meet in PE (i, j) at the same cycle. Each lane
// is a chain of W-bit registers, cleared by synchronous active-low reset.
// The paper feeds A and B into the array's edges; the delay lines that
// realise the usual systolic skew are this design's own construction.
module skew_buffer #(
  parameter int unsigned LANES = 32,
  parameter int unsigned W     = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] din  [LANES],
  output logic [W-1:0] dout [LANES]
);

  for (genvar i = 0; i < LANES; i++) begin : g_lane
    if (i == 0) begin : g_pass
      assign dout[i] = din[i];
    end else begin : g_delay
      // chain[d] is lane i delayed by d+1 cycles
      logic [W-1:0] chain [i];
      always_ff @(posedge clk) begin
        if (!rst_n) begin
          for (int d = 0; d < i; d++) chain[d] <= '0;
        end else begin
          chain[0] <= din[i];
          for (int d = 1; d < i; d++) chain[d] <= chain[d-1];
        end
      end
      assign dout[i] = chain[i-1];
    end
  end

endmodule
