// tb_asv_deep_layer: one full-size tile of a deep stereo-DNN convolution on
// the accelerator at its default size (24x24 PEs, 1.5 MB buffer).
//
// The tile is 24 output pixels x 24 filters of a 3x3 convolution over 512
// input channels, so every dot product has K = 4608 terms: the depth of the
// deeper layers of DispNet-class networks. The key-frame program loads the
// im2col ifmap tile and the filters from DRAM (221,184 words together,
// spread over eight 128 KB banks), runs one array job, which the sequencer
// splits into 18 chunks of 256 terms with the accumulators kept between
// chunks, and stores the 576 results back to DRAM. Every result is compared
// with a 32-bit reference sum, shifted and saturated as the hardware does.
// The DRAM model grants three requests in four and returns read data after
// 1..3 cycles.
module tb_asv_deep_layer;
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

  localparam int M = 24, N = 24, K = 4608, SH = 12;
  localparam int D_A = 0, D_B = 'h20000, D_O = 'h3F000;
  localparam int B_A = 'h00000, B_B = 'h40000, B_O = 'h80000;
  localparam int DW = 1 << 18;

  // ------------------------------------------------------------ DRAM model
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
      if (dram_we) dram[dram_addr[17:0]] <= dram_wdata;
      else begin rd_hold <= dram[dram_addr[17:0]]; cnt <= $urandom_range(1, 3); end
    end
  end

  initial begin
    #40000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  function automatic instr_t i_dma(logic w, logic st, int da, int ba, int len);
    instr_t i;
    dma_job_t d;
    d = '{store: st, dram_addr: daddr_t'(da), buf_addr: baddr_t'(ba), len: 20'(len)};
    i = '0; i.opcode = OP_DMA; i.wait_done = w;
    i.payload[$bits(dma_job_t)-1:0] = d;
    return i;
  endfunction

  function automatic instr_t i_gemm(int sh, int ab, int as, int bb, int bs,
                                    int m, int n, int k, int ob, int ors, int ocs);
    instr_t i;
    gemm_job_t g;
    g = '{mode: PE_MAC, shift: 5'(sh), a_base: baddr_t'(ab), a_stride: 16'(as), b_base: baddr_t'(bb),
          b_stride: 16'(bs), m: 8'(m), n: 8'(n), k: 16'(k), o_base: baddr_t'(ob),
          o_rstride: 16'(ors), o_cstride: 16'(ocs)};
    i = '0; i.opcode = OP_GEMM; i.wait_done = 1'b1;
    i.payload[$bits(gemm_job_t)-1:0] = g;
    return i;
  endfunction

  task automatic put(int pc, instr_t i);
    imem_we = 1; imem_addr = 8'(pc); imem_wdata = i;
    @(negedge clk);
    imem_we = 0;
  endtask

  initial begin
    int cyc;
    imem_we = 0; imem_addr = 0; imem_wdata = '0; frame_start = 0;
    cfg_pw = 0; cfg_key_pc = 0; cfg_nonkey_pc = 0;
    for (int i = 0; i < DW; i++) dram[i] = '0;
    for (int i = 0; i < M*K; i++) dram[D_A + i] = data_t'($signed($urandom_range(0, 200)) - 100);
    for (int i = 0; i < N*K; i++) dram[D_B + i] = data_t'($signed($urandom_range(0, 200)) - 100);
    repeat (3) @(negedge clk);
    rst_n = 1;
    put(0, i_dma(1'b0, 1'b0, D_A, B_A, M*K));
    put(1, i_dma(1'b1, 1'b0, D_B, B_B, N*K));
    put(2, i_gemm(SH, B_A, K, B_B, K, M, N, K, B_O, N, 1));
    put(3, i_dma(1'b1, 1'b1, D_O, B_O, M*N));
    put(4, '0);                                   // OP_END
    frame_start = 1;
    @(negedge clk);
    frame_start = 0;
    cyc = 0;
    while (!frame_done && cyc < 5000000) begin @(negedge clk); cyc++; end
    chk("frame finished", longint'(frame_done), 1);
    chk("key frame", longint'(frame_is_key), 1);
    $display("deep layer tile (K=%0d) took %0d cycles", K, cyc);
    for (int m = 0; m < M; m++)
      for (int n = 0; n < N; n++) begin
        longint acc;
        acc = 0;
        for (int k = 0; k < K; k++) acc += longint'(dram[D_A + m*K + k]) * dram[D_B + n*K + k];
        chk($sformatf("C[%0d][%0d]", m, n), dram[D_O + m*N + n], rsat(longint'(int'(acc)) >>> SH));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
