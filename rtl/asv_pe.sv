// asv_pe: one processing element of the systolic array.
//
// The PE multiplies-and-accumulates (acc += a*b) for convolution layers and,
// as the stereo extension, accumulates absolute differences (acc += |a-b|)
// for block matching, selected by 'mode'. Operands are 16-bit signed
// fixed-point, the accumulator is 32 bits. The two operand registers pass
// 'a' on to the east neighbour and 'b' to the south neighbour one cycle
// later, so data ripple through the array (output-stationary dataflow).
// Following the paper: two 16-bit input registers, a 16-bit MAC with a 32-bit
// accumulator, and the absolute-difference mode. This design's own choices:
// the output-stationary dataflow, wrap-around accumulation, and the drain
// path (with 'drain' high the accumulator takes the value of the PE above,
// so results leave through the bottom row one row per cycle).
//
// Timing: operands presented in cycle t are accumulated at the end of cycle t
// and appear on a_out/b_out in cycle t+1. 'clear' zeroes the accumulator and
// has priority over 'en'; 'drain' has priority over both.
module asv_pe
  import asv_pkg::*;
(
  input  logic     clk,
  input  logic     rst_n,
  input  pe_mode_e mode,
  input  logic     en,       // accumulate this cycle's operands
  input  logic     clear,    // zero the accumulator
  input  logic     drain,    // shift accumulators down one row
  input  data_t    a_in,     // from the west
  input  data_t    b_in,     // from the north
  input  acc_t     acc_in,   // accumulator of the PE above (drain path)
  output data_t    a_out,    // to the east
  output data_t    b_out,    // to the south
  output acc_t     acc_out
);

  data_t a_q, b_q;
  acc_t  acc_q;
  acc_t  term;
  logic signed [DATA_W:0] diff;
  logic        [DATA_W:0] absdiff;
  acc_t                   prod;

  assign diff    = {a_in[DATA_W-1], a_in} - {b_in[DATA_W-1], b_in};
  assign absdiff = diff[DATA_W] ? (~diff + 1'b1) : diff;
  assign prod    = acc_t'(a_in) * acc_t'(b_in);
  assign term    = (mode == PE_SAD) ? acc_t'({{(ACC_W-DATA_W-1){1'b0}}, absdiff}) : prod;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_q   <= '0;
      b_q   <= '0;
      acc_q <= '0;
    end else begin
      a_q <= a_in;
      b_q <= b_in;
      if (drain)      acc_q <= acc_in;
      else if (clear) acc_q <= '0;
      else if (en)    acc_q <= acc_q + term;
    end
  end

  assign a_out   = a_q;
  assign b_out   = b_q;
  assign acc_out = acc_q;

endmodule
