// asv_udiv: sequential unsigned restoring divider.
//
// quotient = dividend / divisor, one quotient bit per enabled cycle (ce high),
// NW enabled cycles in all. 'start' (sampled when ce is high) loads the
// operands; 'busy' is high until the quotient is ready. A zero divisor gives
// an all-ones quotient. Used by the scalar unit's Compute Flow operation,
// which solves a 2x2 linear system per pixel.
module asv_udiv #(
  parameter int unsigned NW = 48,  // dividend / quotient width
  parameter int unsigned DW = 34   // divisor width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          ce,
  input  logic          start,
  input  logic [NW-1:0] dividend,
  input  logic [DW-1:0] divisor,
  output logic          busy,
  output logic [NW-1:0] quotient
);

  localparam int unsigned CW = $clog2(NW + 1);

  logic [DW-1:0] rem;   // always below the divisor
  logic [NW-1:0] q;
  logic [DW-1:0] d;
  logic [CW-1:0] cnt;
  logic [DW+1:0] trial;

  assign trial = {1'b0, rem, q[NW-1]} - {2'b00, d};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rem  <= '0;
      q    <= '0;
      d    <= '0;
      cnt  <= '0;
      busy <= 1'b0;
    end else if (ce) begin
      if (!busy && start) begin
        rem  <= '0;
        q    <= dividend;
        d    <= divisor;
        cnt  <= CW'(NW);
        busy <= 1'b1;
      end else if (busy) begin
        if (!trial[DW+1]) begin
          rem <= trial[DW-1:0];
          q   <= {q[NW-2:0], 1'b1};
        end else begin
          rem <= {rem[DW-2:0], q[NW-1]};
          q   <= {q[NW-2:0], 1'b0};
        end
        cnt <= cnt - 1;
        if (cnt == 1) busy <= 1'b0;
      end
    end
  end

  assign quotient = q;

endmodule
