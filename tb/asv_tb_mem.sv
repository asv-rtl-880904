// asv_tb_mem: behavioural model of one global-buffer port for unit tests.
//
// A flat word memory that grants a request with probability STALL_PCT% less
// than always (random stalls exercise the clients' hold rule) and returns read
// data one cycle after the grant. Testbenches preload and inspect 'mem'
// hierarchically.
module asv_tb_mem
  import asv_pkg::*;
#(
  parameter int unsigned WORDS     = 4096,
  parameter int unsigned STALL_PCT = 25
) (
  input  logic     clk,
  input  buf_req_t bq,
  output buf_rsp_t bs
);
  data_t mem [WORDS];
  logic  gnt_r;
  int    stalls = 0;

  always @(negedge clk) gnt_r <= ($urandom_range(0, 99) >= STALL_PCT);

  assign bs.gnt = bq.req && gnt_r;

  always_ff @(posedge clk) begin
    bs.rvalid <= 1'b0;
    if (bq.req && !gnt_r) stalls <= stalls + 1;
    if (bs.gnt) begin
      if (bq.we) mem[bq.addr] <= bq.wdata;
      else begin
        bs.rdata  <= mem[bq.addr];
        bs.rvalid <= 1'b1;
      end
    end
  end
endmodule
