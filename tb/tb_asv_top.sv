// tb_asv_top: end-to-end test of the accelerator at its reference size
// (24x24 array, 8 lanes, 12 x 128 KB buffer, window of 4 frames).
//
// The DRAM is a word memory with random grant and latency. Two programs are
// loaded:
//   key frame      load an im2col ifmap tile and conv filters; convolution on
//                  the array (MAC) while the DMA fetches the deconvolution
//                  sub-kernels behind it; ReLU and a pooling step in the
//                  scalar unit; two sub-kernel convolutions that reuse the
//                  same ifmap tile and are interleaved into one ofmap by
//                  stride-2 stores (the gather); a deeper layer whose dot
//                  products (K = 300) exceed the operand stores and run in two
//                  chunks; results stored to DRAM.
//   non-key frame  SAD block matching of 4 left blocks against 24 candidate
//                  windows, the best-disparity search, Matrix Update over a
//                  3x2 frame, Compute Flow and disparity propagation; results
//                  stored to DRAM.
// Five frames run; frames 0 and 4 must be key frames. Every result word in
// DRAM is compared with a reference computed here. Mechanisms counted (each
// must happen): key frame, non-key frame, MAC, SAD, stride-2 gather, ReLU,
// pooling, Matrix Update with an out-of-frame boundary case, Compute Flow,
// propagation, arg-min, buffer bank conflict, issue stall.
module tb_asv_top;
  import asv_pkg::*;
  import asv_tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  logic imem_we;
  logic [7:0] imem_addr;
  instr_t imem_wdata;
  logic [7:0] cfg_pw, cfg_key_pc, cfg_nonkey_pc;
  logic frame_start, frame_busy, frame_done, frame_is_key;
  logic [31:0] stat_issue_stalls, stat_buf_conflicts;
  logic dram_req, dram_we, dram_gnt, dram_rvalid;
  daddr_t dram_addr;
  data_t dram_wdata, dram_rdata;
  int checks = 0, failures = 0;

  always #1 clk = ~clk;

  asv_top dut (.*);

  // ------------------------------------------------------------ DRAM model
  localparam int DW = 65536;
  data_t dram [DW];
  logic  gnt_r;
  int    cnt = 0;
  data_t rd_hold;
  always @(negedge clk) gnt_r <= ($urandom_range(0, 3) != 0);
  assign dram_gnt = dram_req && gnt_r && (cnt == 0);
  always_ff @(posedge clk) begin
    dram_rvalid <= 1'b0;
    if (cnt > 0) begin
      cnt <= cnt - 1;
      if (cnt == 1) begin dram_rvalid <= 1'b1; dram_rdata <= rd_hold; end
    end else if (dram_gnt) begin
      if (dram_we) dram[dram_addr[15:0]] <= dram_wdata;
      else begin rd_hold <= dram[dram_addr[15:0]]; cnt <= $urandom_range(1, 3); end
    end
  end

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ------------------------------------------------------------ helpers
  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic shortint rnd(int range);
    return shortint'($signed($urandom_range(0, 2 * range)) - range);
  endfunction

  function automatic instr_t i_dma(logic w, logic st, int da, int ba, int len);
    instr_t i;
    dma_job_t d;
    d = '{store: st, dram_addr: daddr_t'(da), buf_addr: baddr_t'(ba), len: 20'(len)};
    i = '0; i.opcode = OP_DMA; i.wait_done = w;
    i.payload[$bits(dma_job_t)-1:0] = d;
    return i;
  endfunction

  function automatic instr_t i_gemm(logic w, pe_mode_e md, int sh, int ab, int as, int bb, int bs,
                                    int m, int n, int k, int ob, int ors, int ocs);
    instr_t i;
    gemm_job_t g;
    g = '{mode: md, shift: 5'(sh), a_base: baddr_t'(ab), a_stride: 16'(as), b_base: baddr_t'(bb),
          b_stride: 16'(bs), m: 8'(m), n: 8'(n), k: 16'(k), o_base: baddr_t'(ob),
          o_rstride: 16'(ors), o_cstride: 16'(ocs)};
    i = '0; i.opcode = OP_GEMM; i.wait_done = w;
    i.payload[$bits(gemm_job_t)-1:0] = g;
    return i;
  endfunction

  function automatic instr_t i_sc(logic w, sc_op_e op, int src, int dst, int count,
                                  int wd, int ht, int grp, int db);
    instr_t i;
    scalar_job_t s;
    s = '{op: op, src: baddr_t'(src), dst: baddr_t'(dst), count: 20'(count), width: 12'(wd),
          height: 12'(ht), group: 8'(grp), disp_base: data_t'(db)};
    i = '0; i.opcode = OP_SCALAR; i.wait_done = w;
    i.payload[$bits(scalar_job_t)-1:0] = s;
    return i;
  endfunction

  function automatic instr_t i_op(opcode_e op);
    instr_t i;
    i = '0; i.opcode = op;
    return i;
  endfunction

  int pc_load = 0;
  task automatic put(instr_t i);
    imem_we = 1; imem_addr = 8'(pc_load); imem_wdata = i;
    @(negedge clk);
    imem_we = 0;
    pc_load++;
  endtask

  // ------------------------------------------------------------ layout
  // DRAM inputs
  localparam int D_A = 'h0000, D_B = 'h0400, D_S = 'h0600;   // conv ifmap, filters, sub-kernels
  localparam int D_BMA = 'h1000, D_BMB = 'h1400;              // BM windows, left blocks
  localparam int D_OF = 'h2000;                                 // optical-flow inputs
  localparam int D_LA = 'h3000, D_LB = 'h5000;                  // deep layer: K > KMAX
  // DRAM outputs
  localparam int O_RELU = 'h8000, O_POOL = 'h8400, O_DEC = 'h8800;
  localparam int O_DEEP = 'h9000;
  localparam int O_DISP = 'hA000, O_MAT = 'hA100, O_FLOW = 'hA200, O_PROP = 'hA300;
  // buffer (bank = address / 65536)
  localparam int B_A = 'h00000, B_B = 'h10000, B_S = 'h10100, B_CONV = 'h20000;
  localparam int B_RELU = 'h30000, B_POOL = 'h31000, B_DEC = 'h40000;
  localparam int B_BMA = 'h50000, B_BMB = 'h60000, B_SAD = 'h70000, B_DISP = 'h78000;
  localparam int B_LA = 'hA0000, B_LB = 'hB0000, B_DEEP = 'hB8000;
  localparam int B_OF = 'h80000, B_MAT = 'h90000, B_FLOW = 'h90100, B_PROP = 'h90200;

  localparam int CM = 24, CN = 8, CK = 18;      // conv tile
  localparam int SK = 4, SN = 2;                // deconvolution sub-kernels: 2x2, 2 filters each
  localparam int BK = 9, BN = 4, BD = 24;       // 3x3 blocks, 4 pixels, 24 candidates
  localparam int NMAT = 6, NFLOW = 5, NPROP = 4;
  localparam int LK = 300;                      // deep layer: 3x3 kernel over 33+ channels

  // ------------------------------------------------------------ references
  function automatic data_t conv_ref(int m, int n, int kb, int bbase, int kk, int sh,
                                     int abase = D_A, int ak = CK);
    longint acc = 0;
    for (int k = 0; k < kk; k++) acc += longint'(dram[abase + m*ak + k]) * dram[bbase + n*kb + k];
    return rsat(longint'(int'(acc)) >>> sh);
  endfunction

  int n_key = 0, n_nonkey = 0, n_mac = 0, n_sad = 0, n_gather = 0, n_relu = 0, n_pool = 0;
  int n_deep = 0;
  int n_mat = 0, n_mat_oob = 0, n_flow = 0, n_prop = 0, n_argmin = 0;

  task automatic check_key();
    int f0 = failures;
    data_t c [CM][CN];
    for (int m = 0; m < CM; m++) for (int n = 0; n < CN; n++) c[m][n] = conv_ref(m, n, CK, D_B, CK, 4);
    // conv + ReLU
    for (int m = 0; m < CM; m++) for (int n = 0; n < CN; n++)
      chk("conv+relu", dram[O_RELU + m*CN + n], c[m][n] < 0 ? 0 : c[m][n]);
    if (failures == f0) begin n_mac++; n_relu++; end
    f0 = failures;
    for (int i = 0; i < CM*CN/2; i++) begin
      data_t a, b;
      a = c[(2*i)/CN][(2*i)%CN];     a = a < 0 ? 0 : a;
      b = c[(2*i+1)/CN][(2*i+1)%CN]; b = b < 0 ? 0 : b;
      chk("pool", dram[O_POOL + i], a > b ? a : b);
    end
    if (failures == f0) n_pool++;
    f0 = failures;
    // two sub-kernel convolutions interleaved: position 4m + 2n + phase
    for (int ph = 0; ph < 2; ph++)
      for (int m = 0; m < CM; m++) for (int n = 0; n < SN; n++)
        chk("deconv gather", dram[O_DEC + 4*m + 2*n + ph], conv_ref(m, n, SK, D_S + ph*SN*SK, SK, 0));
    if (failures == f0) n_gather++;
    f0 = failures;
    // deep layer, K = 300 > KMAX: accumulated over two chunks in one job
    for (int m = 0; m < CM; m++) for (int n = 0; n < CN; n++)
      chk("deep conv", dram[O_DEEP + m*CN + n], conv_ref(m, n, LK, D_LB, LK, 8, D_LA, LK));
    if (failures == f0) n_deep++;
  endtask

  task automatic check_nonkey();
    int f0 = failures;
    shortint r0[5], r1[5], g[5], o5[5], o2[2];
    // block matching: SAD of left block n against candidate window m
    for (int n = 0; n < BN; n++) begin
      longint best = -1;
      int bi = 0;
      for (int m = 0; m < BD; m++) begin
        longint s = 0;
        for (int k = 0; k < BK; k++) begin
          longint a = dram[D_BMA + m*BK + k], b = dram[D_BMB + n*BK + k];
          s += a > b ? a - b : b - a;
        end
        if (best < 0 || rsat(s) < best) begin best = rsat(s); bi = m; end
      end
      chk("disparity", dram[O_DISP + n], bi - 12);
    end
    if (failures == f0) begin n_sad++; n_argmin++; end
    f0 = failures;
    for (int i = 0; i < NMAT; i++) begin
      int x = i % 3, y = i / 3;
      for (int s = 0; s < 5; s++) begin r0[s] = dram[D_OF + 12*i + s]; r1[s] = dram[D_OF + 12*i + 5 + s]; end
      matupd(r0, r1, dram[D_OF + 12*i + 10], dram[D_OF + 12*i + 11], x, y, 3, 2, o5);
      for (int s = 0; s < 5; s++) chk("matupd", dram[O_MAT + 5*i + s], o5[s]);
      if (x + (int'(shortint'(dram[D_OF + 12*i + 10])) >>> 8) >= 2 ||
          x + (int'(shortint'(dram[D_OF + 12*i + 10])) >>> 8) < 0 ||
          y + (int'(shortint'(dram[D_OF + 12*i + 11])) >>> 8) != 0) n_mat_oob++;
    end
    if (failures == f0) n_mat++;
    f0 = failures;
    for (int i = 0; i < NFLOW; i++) begin
      for (int s = 0; s < 5; s++) g[s] = dram[D_OF + 'h100 + 5*i + s];
      flow(g, o2);
      chk("flow dx", dram[O_FLOW + 2*i], o2[0]);
      chk("flow dy", dram[O_FLOW + 2*i + 1], o2[1]);
    end
    if (failures == f0) n_flow++;
    f0 = failures;
    for (int i = 0; i < NPROP; i++)
      chk("prop", dram[O_PROP + i], rsat(longint'(dram[D_OF + 'h200 + 3*i]) + dram[D_OF + 'h200 + 3*i + 2]
                                         - dram[D_OF + 'h200 + 3*i + 1]));
    if (failures == f0) n_prop++;
  endtask

  task automatic expect_count(string what, int n);
    checks++;
    $display("mechanism %-24s %0d", what, n);
    if (n == 0) begin failures++; $display("FAIL mechanism never happened: %s", what); end
  endtask

  // ------------------------------------------------------------ stimulus
  initial begin
    int cyc;
    imem_we = 0; imem_addr = 0; imem_wdata = '0; frame_start = 0;
    cfg_pw = 0; cfg_key_pc = 0; cfg_nonkey_pc = 32;
    for (int i = 0; i < DW; i++) dram[i] = '0;
    for (int i = 0; i < CM*CK; i++)  dram[D_A + i] = rnd(100);
    for (int i = 0; i < CN*CK; i++)  dram[D_B + i] = rnd(100);
    for (int i = 0; i < 2*SN*SK; i++) dram[D_S + i] = rnd(100);
    for (int i = 0; i < BD*BK; i++)  dram[D_BMA + i] = shortint'($urandom_range(0, 255));
    for (int i = 0; i < BN*BK; i++)  dram[D_BMB + i] = shortint'($urandom_range(0, 255));
    for (int i = 0; i < NMAT; i++) begin
      for (int s = 0; s < 10; s++) dram[D_OF + 12*i + s] = rnd(500);
      dram[D_OF + 12*i + 10] = rnd(600);    // up to about 2 pixels of flow
      dram[D_OF + 12*i + 11] = rnd(300);
    end
    for (int i = 0; i < NFLOW; i++) begin
      dram[D_OF + 'h100 + 5*i + 0] = shortint'($urandom_range(64, 2000));
      dram[D_OF + 'h100 + 5*i + 1] = rnd(40);
      dram[D_OF + 'h100 + 5*i + 2] = shortint'($urandom_range(64, 2000));
      dram[D_OF + 'h100 + 5*i + 3] = rnd(2000);
      dram[D_OF + 'h100 + 5*i + 4] = rnd(2000);
    end
    for (int i = 0; i < 3*NPROP; i++) dram[D_OF + 'h200 + i] = rnd(3000);
    for (int i = 0; i < CM*LK; i++) dram[D_LA + i] = rnd(100);
    for (int i = 0; i < CN*LK; i++) dram[D_LB + i] = rnd(100);
    repeat (3) @(negedge clk);
    rst_n = 1;

    // key-frame program at 0
    put(i_dma(0, 0, D_A, B_A, CM*CK));
    put(i_dma(1, 0, D_B, B_B, CN*CK));                  // waits for the first DMA to free up
    put(i_gemm(0, PE_MAC, 4, B_A, CK, B_B, CK, CM, CN, CK, B_CONV, CN, 1));
    put(i_dma(0, 0, D_S, B_S, 2*SN*SK));                // prefetch behind the convolution
    put(i_op(OP_SYNC));
    put(i_sc(1, SC_RELU, B_CONV, B_RELU, CM*CN, 1, 1, 0, 0));
    put(i_sc(0, SC_MAX2, B_RELU, B_POOL, CM*CN/2, 1, 1, 0, 0));
    put(i_gemm(0, PE_MAC, 0, B_A, CK, B_S, SK, CM, SN, SK, B_DEC, 4, 2));
    put(i_gemm(0, PE_MAC, 0, B_A, CK, B_S + SN*SK, SK, CM, SN, SK, B_DEC + 1, 4, 2));
    put(i_dma(0, 1, O_RELU, B_RELU, CM*CN));
    put(i_op(OP_SYNC));
    put(i_dma(0, 1, O_POOL, B_POOL, CM*CN/2));
    put(i_dma(0, 1, O_DEC, B_DEC, 4*CM));
    put(i_dma(0, 0, D_LA, B_LA, CM*LK));
    put(i_dma(1, 0, D_LB, B_LB, CN*LK));
    put(i_gemm(1, PE_MAC, 8, B_LA, LK, B_LB, LK, CM, CN, LK, B_DEEP, CN, 1));
    put(i_dma(0, 1, O_DEEP, B_DEEP, CM*CN));
    put(i_op(OP_END));
    // non-key-frame program at 32
    pc_load = 32;
    put(i_dma(0, 0, D_BMA, B_BMA, BD*BK));
    put(i_dma(1, 0, D_BMB, B_BMB, BN*BK));
    put(i_gemm(0, PE_SAD, 0, B_BMA, BK, B_BMB, BK, BD, BN, BK, B_SAD, 1, BD));
    put(i_dma(1, 0, D_OF, B_OF, 'h20C));                // overlaps block matching
    put(i_op(OP_SYNC));
    put(i_sc(1, SC_ARGMIN, B_SAD, B_DISP, BN, 1, 1, BD, -12));
    put(i_sc(0, SC_MATUPD, B_OF, B_MAT, NMAT, 3, 2, 0, 0));
    put(i_sc(0, SC_FLOW, B_OF + 'h100, B_FLOW, NFLOW, 1, 1, 0, 0));
    put(i_sc(0, SC_PROP, B_OF + 'h200, B_PROP, NPROP, 1, 1, 0, 0));
    put(i_dma(0, 1, O_DISP, B_DISP, BN));
    put(i_op(OP_SYNC));
    put(i_dma(0, 1, O_MAT, B_MAT, 5*NMAT));
    put(i_dma(0, 1, O_FLOW, B_FLOW, 2*NFLOW));
    put(i_dma(0, 1, O_PROP, B_PROP, NPROP));
    put(i_op(OP_END));

    for (int f = 0; f < 5; f++) begin
      for (int i = 'h8000; i < 'hB000; i++) dram[i] = 'h7777;
      frame_start = 1;
      @(negedge clk);
      frame_start = 0;
      cyc = 0;
      while (!frame_done && cyc < 200000) begin @(negedge clk); cyc++; end
      chk("frame finished", longint'(frame_done), 1);
      chk("key frame choice", longint'(frame_is_key), longint'((f % 4) == 0));
      $display("frame %0d (%s) took %0d cycles", f, frame_is_key ? "key" : "non-key", cyc);
      if (frame_is_key) begin n_key++; check_key(); end
      else begin n_nonkey++; check_nonkey(); end
      @(negedge clk);
    end

    expect_count("key frame", n_key);
    expect_count("non-key frame", n_nonkey);
    expect_count("conv on array (MAC)", n_mac);
    expect_count("block matching (SAD)", n_sad);
    expect_count("stride-2 gather", n_gather);
    expect_count("K split into chunks", n_deep);
    expect_count("ReLU", n_relu);
    expect_count("pooling", n_pool);
    expect_count("Matrix Update", n_mat);
    expect_count("boundary check hit", n_mat_oob);
    expect_count("Compute Flow", n_flow);
    expect_count("propagation", n_prop);
    expect_count("arg-min", n_argmin);
    expect_count("buffer bank conflict", int'(stat_buf_conflicts));
    expect_count("issue stall", int'(stat_issue_stalls));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
