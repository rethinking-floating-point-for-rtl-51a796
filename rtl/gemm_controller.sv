// gemm_controller: sequences one output-stationary GEMM on the array.
//
// States:
//   FEED  - in_ready is high; each cycle with in_valid one k-slice (a column
//           of A and a row of B) enters the array; the first slice after
//           reset or after the previous result is tagged first-of-sum.
//           Cycles without in_valid enter as bubbles. The slice with in_last
//           ends the phase.
//   DRAIN - in_ready is low for DRAIN_CYC = 2*DIM-1 cycles, until the last
//           slice has passed PE (DIM-1, DIM-1).
//   SHIFT - DIM cycles of shift_en; in cycle s the bottom row of the array
//           holds row DIM-1-s of C, which the output encoders register, so
//           out_valid / out_row follow one cycle later. Then back to FEED.
// Throughput is one k-slice per cycle; a K-deep GEMM takes K + 2*DIM - 1 +
// DIM cycles plus one output register stage. The paper states only that C
// is accumulated in place and shifted out on completion; this schedule,
// which does not overlap the shift-out with the next GEMM, is this design's.
// Synchronous active-low reset. An assertion checks that in_last is only
// given with in_valid.
module gemm_controller #(
  parameter int unsigned DIM = 32
) (
  input  logic clk,
  input  logic rst_n,
  input  logic in_valid,
  input  logic in_last,
  output logic in_ready,
  output logic feed_valid,
  output logic feed_first,
  output logic shift_en,
  output logic out_valid,
  output logic [$clog2(DIM)-1:0] out_row,
  output logic busy
);

  localparam int unsigned DRAIN_CYC = 2 * DIM - 1;
  localparam int unsigned CW = $clog2(2 * DIM + 1);

  typedef enum logic [1:0] {FEED, DRAIN, SHIFT} state_e;

  state_e          state;
  logic [CW-1:0]   cnt;
  logic            first_pending;
  logic            accept;

  assign in_ready   = (state == FEED);
  assign accept     = in_valid && in_ready;
  assign feed_valid = accept;
  assign feed_first = accept && first_pending;
  assign shift_en   = (state == SHIFT);
  assign busy       = (state != FEED) || !first_pending;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state         <= FEED;
      cnt           <= '0;
      first_pending <= 1'b1;
      out_valid     <= 1'b0;
      out_row       <= '0;
    end else begin
      out_valid <= shift_en;
      out_row   <= $clog2(DIM)'(DIM - 1 - cnt);
      unique case (state)
        FEED: begin
          if (accept) begin
            first_pending <= 1'b0;
            if (in_last) begin
              state <= DRAIN;
              cnt   <= '0;
            end
          end
        end
        DRAIN: begin
          if (cnt == CW'(DRAIN_CYC - 1)) begin
            state <= SHIFT;
            cnt   <= '0;
          end else cnt <= cnt + 1'b1;
        end
        SHIFT: begin
          if (cnt == CW'(DIM - 1)) begin
            state         <= FEED;
            cnt           <= '0;
            first_pending <= 1'b1;
          end else cnt <= cnt + 1'b1;
        end
        default: state <= FEED;
      endcase
    end
  end

  a_last_needs_valid: assert property (@(posedge clk) disable iff (!rst_n)
    in_last |-> in_valid);

endmodule
