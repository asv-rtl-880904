// tb_asv_scalar_lane: checks every lane operation against the reference
// models on random operands, and the number of lane-clock steps each takes.
module tb_asv_scalar_lane;
  import asv_pkg::*;
  import asv_tb_ref_pkg::*;

  logic clk = 0, rst_n = 0, start = 0;
  logic ce;
  sc_op_e op;
  data_t in [12];
  data_t out [5];
  logic [11:0] x, y, width, height;
  logic busy;
  int checks = 0, failures = 0;

  always #1 clk = ~clk;
  // lane clock enable: one cycle in four
  int dc = 0;
  always @(posedge clk) begin dc <= (dc + 1) % 4; end
  assign ce = (dc == 0);

  asv_scalar_lane dut (.clk, .rst_n, .ce, .start, .op, .in, .x, .y, .width, .height, .busy, .out);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input sc_op_e o, output int steps);
    op = o;
    start = 1;
    @(posedge clk iff ce);
    #0.1 start = 0;
    steps = 0;
    while (busy) begin
      @(posedge clk);
      if (ce) steps++;
    end
    @(negedge clk);
  endtask

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

  initial begin
    int steps;
    shortint r0[5], r1[5], g[5], o5[5], o2[2];
    for (int i = 0; i < 12; i++) in[i] = '0;
    x = 0; y = 0; width = 16; height = 8;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    for (int t = 0; t < 20; t++) begin
      for (int i = 0; i < 3; i++) in[i] = rnd(30000);
      run(SC_RELU, steps);
      chk("relu", out[0], in[0] < 0 ? 0 : in[0]);
      chk("relu steps", steps, 1);
      run(SC_MAX2, steps);
      chk("max2", out[0], in[0] > in[1] ? in[0] : in[1]);
      run(SC_PROP, steps);
      chk("prop", out[0], rsat(longint'(in[0]) + in[2] - in[1]));
    end

    for (int t = 0; t < 40; t++) begin
      for (int i = 0; i < 5; i++) begin r0[i] = rnd(600); r1[i] = rnd(600); end
      for (int i = 0; i < 5; i++) begin in[i] = r0[i]; in[5+i] = r1[i]; end
      in[10] = rnd(t < 20 ? 700 : 4000);
      in[11] = rnd(t < 20 ? 700 : 4000);
      x = 12'($urandom_range(0, 15));
      y = 12'($urandom_range(0, 7));
      run(SC_MATUPD, steps);
      matupd(r0, r1, in[10], in[11], int'(x), int'(y), 16, 8, o5);
      for (int i = 0; i < 5; i++) chk($sformatf("matupd[%0d]", i), out[i], o5[i]);
      chk("matupd steps", steps, 2);
    end

    // boundary cases: the shifted pixel lands on the last valid column/row,
    // one past it, or one before the first
    for (int t = 0; t < 6; t++) begin
      int xs[6] = '{14, 14, 0, 3, 3, 0};
      int ys[6] = '{2, 2, 2, 6, 6, 0};
      int dxs[6] = '{0, 256, -1, 0, 0, 0};
      int dys[6] = '{0, 0, 0, 0, 256, -1};
      for (int i = 0; i < 5; i++) begin r0[i] = rnd(600); r1[i] = rnd(600); end
      for (int i = 0; i < 5; i++) begin in[i] = r0[i]; in[5+i] = r1[i]; end
      in[10] = data_t'(dxs[t]);
      in[11] = data_t'(dys[t]);
      x = 12'(xs[t]);
      y = 12'(ys[t]);
      run(SC_MATUPD, steps);
      matupd(r0, r1, in[10], in[11], int'(x), int'(y), 16, 8, o5);
      for (int i = 0; i < 5; i++) chk($sformatf("matupd edge %0d[%0d]", t, i), out[i], o5[i]);
    end

    for (int t = 0; t < 40; t++) begin
      // a positive definite G with a moderate right-hand side
      g[0] = shortint'($urandom_range(64, 2000));
      g[2] = shortint'($urandom_range(64, 2000));
      g[1] = rnd(40);
      g[3] = rnd(2000);
      g[4] = rnd(2000);
      for (int i = 0; i < 5; i++) in[i] = g[i];
      run(SC_FLOW, steps);
      flow(g, o2);
      chk("flow dx", out[0], o2[0]);
      chk("flow dy", out[1], o2[1]);
      chk("flow steps", steps, 51);
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
