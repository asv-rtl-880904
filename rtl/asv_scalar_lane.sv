// asv_scalar_lane: one lane of the scalar (point-wise) unit.
//
// Each lane applies one point-wise operation to one item (a pixel or an
// activation). Values are Q8.8 signed fixed point (16 bits, 8 fraction bits).
//   SC_RELU   out0 = max(in0, 0)                           activation
//   SC_MAX2   out0 = max(in0, in1)                         one pooling step
//   SC_PROP   out0 = in0 + in2 - in1                       correspondence propagation:
//             the disparity D of a key-frame pixel moved by the left motion
//             dxL (in1) and its right match moved by dxR (in2) becomes D+dxR-dxL
//   SC_MATUPD Matrix Update of dense (Farneback) optical flow. Inputs: the
//             polynomial-expansion coefficients of the current frame at the
//             pixel, R0 = in0..in4 = (b1, b2, a11, a22, a12), those of the
//             previous frame at the displaced pixel, R1 = in5..in9, and the
//             current flow (dx, dy) = (in10, in11). Boundary check: if the
//             displaced pixel (x + floor(dx), y + floor(dy)) is not in_frame
//             [0, width-2] x [0, height-2], R1 counts as zero. Then
//               a11 = (R0.a11 + R1.a11)/2, a22 = (R0.a22 + R1.a22)/2,
//               a12 = (R0.a12 + R1.a12)/4,
//               b1  = (R0.b1 - R1.b1)/2 + a11*dx + a12*dy,
//               b2  = (R0.b2 - R1.b2)/2 + a12*dx + a22*dy,
//             out = (a11^2 + a12^2, (a11 + a22)*a12, a22^2 + a12^2,
//                    a11*b1 + a12*b2, a12*b1 + a22*b2) = (g11, g12, g22, h1, h2).
//   SC_FLOW   Compute Flow: solves [g11 g12; g12 g22] (dx, dy) = (h1, h2) for
//             in0..in4 = (g11, g12, g22, h1, h2):
//               dx = (g22*h1 - g12*h2) / det, dy = (g11*h2 - g12*h1) / det,
//               det = g11*g22 - g12^2 + eps, eps = 2^-10.
// Every result is saturated to 16 bits; divisions round toward zero.
//
// The paper names ReLU, pooling, Compute Flow and Matrix Update as the scalar
// unit's operations and says Matrix Update checks value boundaries; it does
// not give their formulas. The two flow formulas above follow the widely used
// reference implementation of Farneback's algorithm (without its border
// weighting), in this design's Q8.8 fixed point. SC_PROP is the propagation
// step of the stereo algorithm (disparity = x_right - x_left, both moved by
// their motion vectors) placed in the lane as this design's own choice.
//
// Timing: the lane is clocked by the fast clock but advances only on cycles
// with ce high (the scalar unit runs at a quarter of the array clock).
// 'start' is taken on a ce cycle while idle; busy then stays high for one ce
// step (RELU, MAX2, PROP), two (MATUPD) or 51 (FLOW: one to load the
// dividers, 48 quotient bits, one to see them finish, one to sign the result).
//
// Lint note: the determinant is formed at 64 bits; with 16-bit inputs and a
// positive-definite G it fits in 34 bits, so only det[33:0] drives the
// divisor and verilator reports det[63:34] as unused.
module asv_scalar_lane
  import asv_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ce,
  input  logic        start,
  input  sc_op_e      op,
  input  data_t       in   [12],
  input  logic [11:0] x,
  input  logic [11:0] y,
  input  logic [11:0] width,
  input  logic [11:0] height,
  output logic        busy,
  output data_t       out  [5]
);

  typedef enum logic [2:0] {L_IDLE, L_ONE, L_MAT2, L_DIV, L_FLOW_END} lstate_e;

  localparam logic signed [63:0] EPS = 64'sd64;  // 2^-10 in Q16.16

  lstate_e state;
  sc_op_e  op_q;
  data_t   in_q [12];
  logic [11:0] x_q, y_q;

  // ---------------------------------------------------- matrix update
  typedef logic signed [31:0] s32_t;
  s32_t r2, r3, r4, r5, r6;           // stage 1 results (Q8.8 in 32 bits)
  s32_t r2_q, r3_q, r4_q, r5_q, r6_q;
  logic signed [13:0] x1, y1;
  logic in_frame;

  always_comb begin
    s32_t a0, a1, a2, a3, a4;
    s32_t dx, dy;
    x1 = 14'(signed'({2'b00, x_q})) + 14'(in_q[10] >>> FRAC);
    y1 = 14'(signed'({2'b00, y_q})) + 14'(in_q[11] >>> FRAC);
    in_frame = (x1 >= 0) && (x1 < 14'(signed'({2'b00, width})) - 1)
          && (y1 >= 0) && (y1 < 14'(signed'({2'b00, height})) - 1);
    a0 = in_frame ? s32_t'(in_q[5]) : '0;
    a1 = in_frame ? s32_t'(in_q[6]) : '0;
    a2 = in_frame ? s32_t'(in_q[7]) : '0;
    a3 = in_frame ? s32_t'(in_q[8]) : '0;
    a4 = in_frame ? s32_t'(in_q[9]) : '0;
    dx = s32_t'(in_q[10]);
    dy = s32_t'(in_q[11]);
    r4 = (s32_t'(in_q[2]) + a2) >>> 1;
    r5 = (s32_t'(in_q[3]) + a3) >>> 1;
    r6 = (s32_t'(in_q[4]) + a4) >>> 2;
    r2 = ((s32_t'(in_q[0]) - a0) >>> 1) + ((r4 * dx + r6 * dy) >>> FRAC);
    r3 = ((s32_t'(in_q[1]) - a1) >>> 1) + ((r6 * dx + r5 * dy) >>> FRAC);
  end

  data_t m_out [5];
  always_comb begin
    logic signed [63:0] p0, p1, p2, p3, p4;
    p0 = 64'(r4_q) * 64'(r4_q) + 64'(r6_q) * 64'(r6_q);
    p1 = (64'(r4_q) + 64'(r5_q)) * 64'(r6_q);
    p2 = 64'(r5_q) * 64'(r5_q) + 64'(r6_q) * 64'(r6_q);
    p3 = 64'(r4_q) * 64'(r2_q) + 64'(r6_q) * 64'(r3_q);
    p4 = 64'(r6_q) * 64'(r2_q) + 64'(r5_q) * 64'(r3_q);
    m_out[0] = sat16(p0 >>> FRAC);
    m_out[1] = sat16(p1 >>> FRAC);
    m_out[2] = sat16(p2 >>> FRAC);
    m_out[3] = sat16(p3 >>> FRAC);
    m_out[4] = sat16(p4 >>> FRAC);
  end

  // ---------------------------------------------------- compute flow
  logic signed [63:0] det, numx, numy;
  logic [47:0] dvd_x, dvd_y, q_x, q_y;
  logic [33:0] dvs;
  logic        neg_x, neg_y, neg_x_q, neg_y_q;
  logic        div_start, busy_x, busy_y;
  logic        div_started;   // first step of a multi-step operation done

  always_comb begin
    logic signed [63:0] g11, g12, g22, h1, h2, d;
    g11  = 64'(in_q[0]);
    g12  = 64'(in_q[1]);
    g22  = 64'(in_q[2]);
    h1   = 64'(in_q[3]);
    h2   = 64'(in_q[4]);
    d    = g11 * g22 - g12 * g12 + EPS;
    det  = (d < EPS) ? EPS : d;      // G is positive semi-definite; guard anyway
    numx = g22 * h1 - g12 * h2;      // Q16.16
    numy = g11 * h2 - g12 * h1;
    neg_x = numx < 0;
    neg_y = numy < 0;
    dvd_x = 48'((neg_x ? -numx : numx) <<< FRAC);
    dvd_y = 48'((neg_y ? -numy : numy) <<< FRAC);
    dvs   = 34'(det);
  end

  assign div_start = (state == L_DIV) && !div_started;

  asv_udiv #(.NW(48), .DW(34)) u_div_x (
    .clk(clk), .rst_n(rst_n), .ce(ce), .start(div_start),
    .dividend(dvd_x), .divisor(dvs), .busy(busy_x), .quotient(q_x));
  asv_udiv #(.NW(48), .DW(34)) u_div_y (
    .clk(clk), .rst_n(rst_n), .ce(ce), .start(div_start),
    .dividend(dvd_y), .divisor(dvs), .busy(busy_y), .quotient(q_y));

  // ---------------------------------------------------- sequencing

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= L_IDLE;
      op_q  <= SC_RELU;
      x_q   <= '0;
      y_q   <= '0;
      for (int i = 0; i < 12; i++) in_q[i] <= '0;
      for (int i = 0; i < 5; i++)  out[i]  <= '0;
      r2_q <= '0; r3_q <= '0; r4_q <= '0; r5_q <= '0; r6_q <= '0;
      neg_x_q <= 1'b0;
      neg_y_q <= 1'b0;
      div_started <= 1'b0;
    end else if (ce) begin
      unique case (state)
        L_IDLE: if (start) begin
          op_q  <= op;
          in_q  <= in;
          x_q   <= x;
          y_q   <= y;
          div_started <= 1'b0;
          unique case (op)
            SC_MATUPD: state <= L_MAT2;
            SC_FLOW:   state <= L_DIV;
            default:   state <= L_ONE;
          endcase
        end
        L_ONE: begin
          for (int i = 0; i < 5; i++) out[i] <= '0;
          unique case (op_q)
            SC_RELU: out[0] <= in_q[0][DATA_W-1] ? '0 : in_q[0];
            SC_MAX2: out[0] <= (in_q[0] > in_q[1]) ? in_q[0] : in_q[1];
            SC_PROP: out[0] <= sat16(64'(in_q[0]) + 64'(in_q[2]) - 64'(in_q[1]));
            default: out[0] <= in_q[0];
          endcase
          state <= L_IDLE;
        end
        L_MAT2: begin
          // first step registers the averaged coefficients, second the products
          if (!div_started) begin
            r2_q <= r2; r3_q <= r3; r4_q <= r4; r5_q <= r5; r6_q <= r6;
            div_started <= 1'b1;
          end else begin
            out   <= m_out;
            state <= L_IDLE;
          end
        end
        L_DIV: begin
          if (!div_started) begin
            neg_x_q     <= neg_x;
            neg_y_q     <= neg_y;
            div_started <= 1'b1;        // dividers load in this step
          end else if (!busy_x && !busy_y) begin
            state <= L_FLOW_END;
          end
        end
        L_FLOW_END: begin
          out[0] <= sat16(neg_x_q ? -64'({16'b0, q_x}) : 64'({16'b0, q_x}));
          out[1] <= sat16(neg_y_q ? -64'({16'b0, q_y}) : 64'({16'b0, q_y}));
          out[2] <= '0;
          out[3] <= '0;
          out[4] <= '0;
          state  <= L_IDLE;
        end
        default: state <= L_IDLE;
      endcase
    end
  end

  assign busy = (state != L_IDLE);

endmodule
