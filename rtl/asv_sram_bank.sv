// asv_sram_bank: one single-port bank of the global buffer.
//
// WORDS x 16-bit synchronous SRAM: a write stores wdata at the end of the
// cycle; a read returns mem[addr] in the next cycle. One access per cycle.
// The chip used compiled SRAM macros for the buffer banks; this array stands
// in for such a macro with the same one-port, one-cycle-read behaviour.
module asv_sram_bank
  import asv_pkg::*;
#(
  parameter int unsigned WORDS = 65536
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic                     we,
  input  logic [$clog2(WORDS)-1:0] addr,
  input  data_t                    wdata,
  output data_t                    rdata
);

  data_t mem [WORDS];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule
