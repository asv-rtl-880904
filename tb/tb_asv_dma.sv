// tb_asv_dma: loads a block from a DRAM model with random latency into a
// buffer model with random stalls, stores another block back, and checks
// every word on both sides, including words just outside the blocks.
module tb_asv_dma;
  import asv_pkg::*;

  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  dma_job_t job;
  buf_req_t bq;
  buf_rsp_t bs;
  logic dram_req, dram_we, dram_gnt, dram_rvalid;
  daddr_t dram_addr;
  data_t dram_wdata, dram_rdata;
  int checks = 0, failures = 0;

  always #1 clk = ~clk;

  asv_dma dut (.*);
  asv_tb_mem #(.WORDS(1024)) u_mem (.clk, .bq, .bs);

  // DRAM model: random grant, read data 2..7 cycles after the grant
  data_t dram [4096];
  logic  gnt_r;
  int    cnt = 0;
  data_t rd_hold;
  always @(negedge clk) gnt_r <= ($urandom_range(0, 2) != 0);
  assign dram_gnt = dram_req && gnt_r && (cnt == 0);
  always_ff @(posedge clk) begin
    dram_rvalid <= 1'b0;
    if (cnt > 0) begin
      cnt <= cnt - 1;
      if (cnt == 1) begin
        dram_rvalid <= 1'b1;
        dram_rdata  <= rd_hold;
      end
    end else if (dram_gnt) begin
      if (dram_we) dram[dram_addr] <= dram_wdata;
      else begin
        rd_hold <= dram[dram_addr];
        cnt     <= $urandom_range(1, 6);
      end
    end
  end

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic run(input dma_job_t jb);
    int cyc = 0;
    job = jb; start = 1;
    @(negedge clk);
    start = 0;
    while (!done) begin @(negedge clk); cyc++; if (cyc > 20000) break; end
    chk("done seen", done, 1);
    @(negedge clk);
    chk("idle after done", busy, 0);
  endtask

  initial begin
    start = 0; job = '0;
    for (int i = 0; i < 4096; i++) dram[i] = data_t'($urandom);
    for (int i = 0; i < 1024; i++) u_mem.mem[i] = data_t'(16'h5a5a);
    repeat (2) @(negedge clk);
    rst_n = 1;
    // load 100 words DRAM[1000..1099] -> buffer[200..299]
    run('{store: 1'b0, dram_addr: 32'd1000, buf_addr: 20'd200, len: 20'd100});
    for (int i = 199; i <= 300; i++)
      chk($sformatf("load buf[%0d]", i), u_mem.mem[i],
          (i >= 200 && i < 300) ? dram[1000 + i - 200] : data_t'(16'h5a5a));
    // store 77 words buffer[250..326] -> DRAM[3000..3076]
    for (int i = 300; i < 327; i++) u_mem.mem[i] = data_t'($urandom);
    run('{store: 1'b1, dram_addr: 32'd3000, buf_addr: 20'd250, len: 20'd77});
    for (int i = 0; i < 77; i++)
      chk($sformatf("store dram[%0d]", 3000 + i), dram[3000 + i], u_mem.mem[250 + i]);
    // zero-length job finishes at once
    run('{store: 1'b0, dram_addr: 32'd0, buf_addr: 20'd0, len: 20'd0});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
