// tb_asv_array_engine: runs convolution-style (MAC) and block-matching (SAD)
// tiles through the array sequencer against a buffer model with random
// stalls, and a stride-2 store that interleaves a sub-convolution into a
// deconvolution ofmap, and jobs whose K exceeds the operand stores (KMAX)
// and therefore runs in chunks. Checks every written word, that nothing else
// was written, and that the (last) streaming phase lasts Kc+ROWS+COLS-2
// cycles, Kc being the length of the last chunk.
module tb_asv_array_engine;
  import asv_pkg::*;

  localparam int R = 6, C = 5, KM = 32, W = 8192;

  logic clk = 0, rst_n = 0;
  logic start, busy, done;
  gemm_job_t job;
  buf_req_t bq;
  buf_rsp_t bs;
  logic [31:0] stalls;
  int checks = 0, failures = 0;

  always #1 clk = ~clk;

  asv_array_engine #(.ROWS(R), .COLS(C), .KMAX(KM)) dut (
    .clk, .rst_n, .start, .job, .busy, .done, .bq, .bs, .stall_cycles(stalls));
  asv_tb_mem #(.WORDS(W)) u_mem (.clk, .bq, .bs);

  initial begin
    #2000000;
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

  // The streaming phase is seen from the buffer port: the first result write
  // follows the last operand read by one clear cycle, K+ROWS+COLS-2 streaming
  // cycles, one more cycle and one drain step per unused bottom row.
  int cyc = 0, last_rd = 0, first_wr = -1;
  always @(posedge clk) begin
    cyc <= cyc + 1;
    if (bs.rvalid) last_rd <= cyc;
    if (bq.req && bq.we && first_wr < 0) first_wr <= cyc;
  end

  data_t shadow [W];

  task automatic run(input pe_mode_e md, input int m, input int n, input int k,
                     input int shift, input int ors, input int ocs);
    gemm_job_t jb;
    longint acc;
    data_t expv;
    jb = '0;
    jb.mode = md; jb.shift = 5'(shift);
    jb.a_base = 20'd100; jb.a_stride = 16'(k + 3);
    jb.b_base = 20'd1200; jb.b_stride = 16'(k + 1);
    jb.m = 8'(m); jb.n = 8'(n); jb.k = 16'(k);
    jb.o_base = 20'd4000; jb.o_rstride = 16'(ors); jb.o_cstride = 16'(ocs);
    for (int i = 0; i < W; i++) u_mem.mem[i] = data_t'($signed($urandom_range(0, 400)) - 200);
    for (int i = 0; i < W; i++) shadow[i] = u_mem.mem[i];
    first_wr = -1;
    job = jb; start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    // K beyond KMAX runs in chunks; the last chunk is what precedes the writes,
    // and only the first chunk has a clear cycle before it
    chk("stream cycles", first_wr - last_rd - 2 - (R - m) + (k > KM ? 1 : 0),
        (k - KM * ((k - 1) / KM)) + R + C - 2);
    for (int mm = 0; mm < m; mm++)
      for (int nn = 0; nn < n; nn++) begin
        acc = 0;
        for (int kk = 0; kk < k; kk++) begin
          longint a, b;
          a = shadow[100 + mm*(k+3) + kk];
          b = shadow[1200 + nn*(k+1) + kk];
          acc += (md == PE_SAD) ? ((a > b) ? a - b : b - a) : a * b;
        end
        expv = asv_tb_ref_pkg::rsat(longint'(acc_t'(acc)) >>> shift);
        chk($sformatf("C[%0d][%0d]", mm, nn), u_mem.mem[4000 + mm*ors + nn*ocs], expv);
        shadow[4000 + mm*ors + nn*ocs] = expv;
      end
    for (int i = 0; i < W; i++)
      if (u_mem.mem[i] != shadow[i]) begin
        failures++; checks++;
        $display("FAIL stray write at %0d", i);
        break;
      end
  endtask

  initial begin
    start = 0; job = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    run(PE_MAC, 6, 5, 9, 4, 5, 1);      // full tile, 3x3 kernel
    run(PE_MAC, 3, 2, 20, 0, 40, 1);    // partial tile, deep K
    run(PE_SAD, 6, 4, 25, 0, 4, 1);     // 5x5 block SAD against 4 left blocks
    run(PE_MAC, 4, 3, 4, 2, 20, 2);     // sub-kernel output gathered with stride 2
    run(PE_MAC, 1, 1, KM, 3, 1, 1);     // longest K in one chunk
    run(PE_MAC, 5, 4, 75, 6, 4, 1);     // K in three chunks (32+32+11)
    run(PE_SAD, 6, 5, 64, 0, 5, 1);     // K in two full chunks
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no stall exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
