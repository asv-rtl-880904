// asv_argmin: block-matching decision logic (comparator).
//
// Receives a stream of matching costs (SAD values), one candidate per cycle
// with in_valid. 'in_first' marks a pixel's first candidate, 'in_last' its
// last. One cycle after the last candidate, out_valid pulses with the index
// of the smallest cost (ties go to the earliest candidate) and that cost.
// With candidates ordered by disparity, the index is the disparity offset
// within the search window.
//
// Follows the paper: block matching needs comparisons of the SAD values of
// the candidate blocks, done in a small amount of extra logic next to the
// scalar unit. This design's own choices: the streaming interface, the tie
// rule, up to 256 candidates per pixel.
module asv_argmin
  import asv_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  input  logic       in_first,
  input  logic       in_last,
  input  data_t      in_cost,
  output logic       out_valid,
  output logic [7:0] out_idx,
  output data_t      out_cost
);

  data_t      best;
  logic [7:0] best_idx;
  logic [7:0] idx;
  logic       take;

  assign take = in_first || (in_cost < best);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      best      <= '0;
      best_idx  <= '0;
      idx       <= '0;
      out_valid <= 1'b0;
      out_idx   <= '0;
      out_cost  <= '0;
    end else begin
      out_valid <= 1'b0;
      if (in_valid) begin
        logic [7:0] cur;
        cur = in_first ? 8'd0 : idx;
        idx <= cur + 1;
        if (take) begin
          best     <= in_cost;
          best_idx <= cur;
        end
        if (in_last) begin
          out_valid <= 1'b1;
          out_idx   <= take ? cur : best_idx;
          out_cost  <= take ? in_cost : best;
        end
      end
    end
  end

endmodule
