// asv_systolic_array: ROWS x COLS grid of asv_pe processing elements.
//
// The array computes, for every PE (i,j), acc(i,j) = sum_k f(A_i[k], B_j[k])
// where f is a*b (convolution) or |a-b| (block matching SAD). Row i's operand
// stream enters on a_west[i] and moves east one PE per cycle; column j's
// stream enters on b_north[j] and moves south one PE per cycle. The caller
// must skew the streams: A_i[k] enters at cycle k+i and B_j[k] at cycle k+j,
// so both meet in PE (i,j) at cycle k+i+j. A K-long product therefore takes
// K+ROWS+COLS-2 cycles of 'en' until the last PE has seen its last operand.
// Results leave through the bottom row: each cycle with 'drain' high shifts
// every accumulator one row down, so south_acc shows row ROWS-1 first, then
// ROWS-2, and so on; zeros fill in from the top.
//
// Follows the paper: a 24x24 TPU-like systolic array of MAC/SAD PEs. This
// design's own choice: the output-stationary dataflow with a bottom-row
// drain (the paper does not say which dataflow its array uses).
module asv_systolic_array
  import asv_pkg::*;
#(
  parameter int unsigned ROWS = 24,
  parameter int unsigned COLS = 24
) (
  input  logic     clk,
  input  logic     rst_n,
  input  pe_mode_e mode,
  input  logic     en,
  input  logic     clear,
  input  logic     drain,
  input  data_t    a_west  [ROWS],
  input  data_t    b_north [COLS],
  output acc_t     south_acc [COLS]
);

  data_t a_h [ROWS][COLS+1];   // horizontal operand wires
  data_t b_v [ROWS+1][COLS];   // vertical operand wires
  acc_t  acc_v [ROWS+1][COLS]; // drain wires; acc_v[i+1][j] is PE (i,j)'s accumulator

  for (genvar i = 0; i < ROWS; i++) begin : g_west
    assign a_h[i][0] = a_west[i];
  end
  for (genvar j = 0; j < COLS; j++) begin : g_north
    assign b_v[0][j]   = b_north[j];
    assign acc_v[0][j] = '0;
    assign south_acc[j] = acc_v[ROWS][j];
  end

  for (genvar i = 0; i < ROWS; i++) begin : g_row
    for (genvar j = 0; j < COLS; j++) begin : g_col
      asv_pe u_pe (
        .clk     (clk),
        .rst_n   (rst_n),
        .mode    (mode),
        .en      (en),
        .clear   (clear),
        .drain   (drain),
        .a_in    (a_h[i][j]),
        .b_in    (b_v[i][j]),
        .acc_in  (acc_v[i][j]),
        .a_out   (a_h[i][j+1]),
        .b_out   (b_v[i+1][j]),
        .acc_out (acc_v[i+1][j])
      );
    end
  end

endmodule
