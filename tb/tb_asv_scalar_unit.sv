// tb_asv_scalar_unit: runs each scalar-unit job type on a buffer model with
// random stalls and compares every result word with the reference models.
// Job sizes are chosen to leave partial batches; the Matrix Update job spans
// several frame rows so the pixel coordinates wrap; the arg-min job uses a
// negative disparity base. Also checks that eight Compute Flow items run in
// parallel lanes (well under twice the time of one item).
module tb_asv_scalar_unit;
  import asv_pkg::*;
  import asv_tb_ref_pkg::*;

  localparam int W = 4096;

  logic clk = 0, rst_n = 0, ce;
  logic start, busy, done;
  scalar_job_t job;
  buf_req_t bq;
  buf_rsp_t bs;
  int checks = 0, failures = 0;
  int dc = 0;

  always #1 clk = ~clk;
  always @(posedge clk) dc <= (dc + 1) % 4;
  assign ce = (dc == 0);

  asv_scalar_unit #(.LANES(8)) dut (.clk, .rst_n, .ce, .start, .job, .busy, .done, .bq, .bs);
  asv_tb_mem #(.WORDS(W)) u_mem (.clk, .bq, .bs);

  initial begin
    #4000000;
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

  function automatic shortint rnd(int range);
    return shortint'($signed($urandom_range(0, 2 * range)) - range);
  endfunction

  localparam int SRC = 100, DST = 2000;

  task automatic run(input sc_op_e op, input int count, input int w, input int h,
                     input int group, input int dbase, output int cycles);
    scalar_job_t jb;
    jb = '{op: op, src: 20'(SRC), dst: 20'(DST), count: 20'(count), width: 12'(w),
           height: 12'(h), group: 8'(group), disp_base: data_t'(dbase)};
    job = jb; start = 1;
    @(negedge clk);
    start = 0;
    cycles = 1;
    while (!done) begin @(negedge clk); cycles++; end
  endtask

  initial begin
    int cyc, t1, t8;
    shortint r0[5], r1[5], g[5], o5[5], o2[2];
    start = 0; job = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;

    // ReLU, 19 items
    for (int i = 0; i < 19; i++) u_mem.mem[SRC + i] = rnd(3000);
    run(SC_RELU, 19, 1, 1, 0, 0, cyc);
    for (int i = 0; i < 19; i++) chk("relu", u_mem.mem[DST + i], u_mem.mem[SRC + i] < 0 ? 0 : u_mem.mem[SRC + i]);

    // pooling step, 5 pairs
    for (int i = 0; i < 10; i++) u_mem.mem[SRC + i] = rnd(3000);
    run(SC_MAX2, 5, 1, 1, 0, 0, cyc);
    for (int i = 0; i < 5; i++)
      chk("max2", u_mem.mem[DST + i], u_mem.mem[SRC + 2*i] > u_mem.mem[SRC + 2*i + 1] ? u_mem.mem[SRC + 2*i] : u_mem.mem[SRC + 2*i + 1]);

    // propagation, 9 items
    for (int i = 0; i < 27; i++) u_mem.mem[SRC + i] = rnd(2000);
    run(SC_PROP, 9, 1, 1, 0, 0, cyc);
    for (int i = 0; i < 9; i++)
      chk("prop", u_mem.mem[DST + i], rsat(longint'(u_mem.mem[SRC + 3*i]) + u_mem.mem[SRC + 3*i + 2] - u_mem.mem[SRC + 3*i + 1]));

    // matrix update on a 5 x 4 frame, 20 pixels; flows up to +-3 pixels
    for (int i = 0; i < 20; i++) begin
      for (int s = 0; s < 10; s++) u_mem.mem[SRC + 12*i + s] = rnd(500);
      u_mem.mem[SRC + 12*i + 10] = rnd(800);
      u_mem.mem[SRC + 12*i + 11] = rnd(800);
    end
    run(SC_MATUPD, 20, 5, 4, 0, 0, cyc);
    for (int i = 0; i < 20; i++) begin
      for (int s = 0; s < 5; s++) begin r0[s] = u_mem.mem[SRC + 12*i + s]; r1[s] = u_mem.mem[SRC + 12*i + 5 + s]; end
      matupd(r0, r1, u_mem.mem[SRC + 12*i + 10], u_mem.mem[SRC + 12*i + 11], i % 5, i / 5, 5, 4, o5);
      for (int s = 0; s < 5; s++) chk($sformatf("matupd px %0d [%0d]", i, s), u_mem.mem[DST + 5*i + s], o5[s]);
    end

    // compute flow: 1 item, then 8 items (timing), then 11 items (values)
    for (int i = 0; i < 11; i++) begin
      u_mem.mem[SRC + 5*i + 0] = shortint'($urandom_range(64, 2000));
      u_mem.mem[SRC + 5*i + 1] = rnd(40);
      u_mem.mem[SRC + 5*i + 2] = shortint'($urandom_range(64, 2000));
      u_mem.mem[SRC + 5*i + 3] = rnd(2000);
      u_mem.mem[SRC + 5*i + 4] = rnd(2000);
    end
    run(SC_FLOW, 1, 1, 1, 0, 0, t1);
    run(SC_FLOW, 8, 1, 1, 0, 0, t8);
    checks++;
    if (t8 >= 2 * t1) begin failures++; $display("FAIL 8 flow items took %0d cycles, 1 item %0d", t8, t1); end
    run(SC_FLOW, 11, 1, 1, 0, 0, cyc);
    for (int i = 0; i < 11; i++) begin
      for (int s = 0; s < 5; s++) g[s] = u_mem.mem[SRC + 5*i + s];
      flow(g, o2);
      chk("flow dx", u_mem.mem[DST + 2*i], o2[0]);
      chk("flow dy", u_mem.mem[DST + 2*i + 1], o2[1]);
    end

    // block-matching decision: 6 pixels x 7 candidates, disparities from -3
    for (int i = 0; i < 42; i++) u_mem.mem[SRC + i] = shortint'($urandom_range(0, 50));
    run(SC_ARGMIN, 6, 1, 1, 7, -3, cyc);
    for (int p = 0; p < 6; p++) begin
      int best = 0;
      for (int c = 1; c < 7; c++) if (u_mem.mem[SRC + 7*p + c] < u_mem.mem[SRC + 7*p + best]) best = c;
      chk("argmin", u_mem.mem[DST + p], best - 3);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
