// tb_asv_controller: loads a key-frame and a non-key-frame program, runs ten
// frames with a propagation window of 4 and six with a window of 2 against
// unit models with random run times, and checks: which frames are key frames,
// the order of dispatched jobs, that wait_done / OP_SYNC / OP_END hold the
// next step until the units are done, and that an instruction for a busy unit
// stalls issue.
module tb_asv_controller;
  import asv_pkg::*;

  logic clk = 0, rst_n = 0;
  logic imem_we;
  logic [7:0] imem_addr;
  instr_t imem_wdata;
  logic [7:0] cfg_pw, cfg_key_pc, cfg_nonkey_pc;
  logic frame_start, frame_busy, frame_done, frame_is_key;
  logic [31:0] issue_stalls;
  logic dma_start, dma_busy, dma_done;
  logic gemm_start, gemm_busy, gemm_done;
  logic sc_start, sc_busy, sc_done;
  dma_job_t dma_job;
  gemm_job_t gemm_job;
  scalar_job_t sc_job;
  int checks = 0, failures = 0;

  always #1 clk = ~clk;

  asv_controller #(.IMEM_DEPTH(256), .PW(4)) dut (.*);

  // unit models: busy for a random 3..20 cycles, done pulse at the end
  int dma_left = 0, gemm_left = 0, sc_left = 0;
  always_ff @(posedge clk) begin
    dma_done <= 0; gemm_done <= 0; sc_done <= 0;
    if (dma_start)  dma_left  <= $urandom_range(3, 20);
    else if (dma_left > 0)  begin dma_left  <= dma_left - 1;  if (dma_left == 1)  dma_done  <= 1; end
    if (gemm_start) gemm_left <= $urandom_range(3, 20);
    else if (gemm_left > 0) begin gemm_left <= gemm_left - 1; if (gemm_left == 1) gemm_done <= 1; end
    if (sc_start)   sc_left   <= $urandom_range(3, 20);
    else if (sc_left > 0)   begin sc_left   <= sc_left - 1;   if (sc_left == 1)   sc_done   <= 1; end
  end
  assign dma_busy  = dma_left > 0;
  assign gemm_busy = gemm_left > 0;
  assign sc_busy   = sc_left > 0;

  // dispatch log: job id = a field set to a unique value per instruction
  int log_q [$];
  always @(posedge clk) begin
    if (dma_start) begin
      log_q.push_back(int'(dma_job.len));
      checks++;
      if (dma_busy) begin failures++; $display("FAIL DMA started while busy"); end
    end
    if (gemm_start) begin
      log_q.push_back(int'(gemm_job.k));
      checks++;
      if (gemm_busy) begin failures++; $display("FAIL array started while busy"); end
    end
    if (sc_start) begin
      log_q.push_back(int'(sc_job.count));
      checks++;
      if (sc_busy) begin failures++; $display("FAIL scalar unit started while busy"); end
    end
  end

  // rules that depend on what is running
  int last_start_id;
  always @(posedge clk) begin
    // scalar job 3 follows gemm 2 with wait_done: gemm must be idle
    if (sc_start && sc_job.count == 3) begin
      checks++;
      if (gemm_busy) begin failures++; $display("FAIL wait_done not honoured"); end
    end
    // DMA 4 follows OP_SYNC: everything must be idle
    if (dma_start && dma_job.len == 4) begin
      checks++;
      if (gemm_busy || sc_busy || dma_busy) begin failures++; $display("FAIL SYNC not honoured"); end
    end
    if (frame_done) begin
      checks++;
      if (gemm_busy || sc_busy || dma_busy) begin failures++; $display("FAIL frame done while busy"); end
    end
  end

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic instr_t mk(opcode_e op, logic w, int id);
    instr_t i;
    dma_job_t d; gemm_job_t g; scalar_job_t s;
    d = '0; g = '0; s = '0;
    d.len = 20'(id); g.k = 16'(id); s.count = 20'(id);
    i.opcode = op; i.wait_done = w; i.payload = '0;
    case (op)
      OP_DMA:    i.payload[$bits(dma_job_t)-1:0]    = d;
      OP_GEMM:   i.payload[$bits(gemm_job_t)-1:0]   = g;
      OP_SCALAR: i.payload[$bits(scalar_job_t)-1:0] = s;
      default: ;
    endcase
    return i;
  endfunction

  task automatic load(int a, instr_t i);
    imem_we = 1; imem_addr = 8'(a); imem_wdata = i;
    @(negedge clk);
    imem_we = 0;
  endtask

  task automatic frame(input bit exp_key);
    int exp_ids [$];
    int n = 0;
    log_q.delete();
    frame_start = 1;
    @(negedge clk);
    frame_start = 0;
    while (!frame_done && n < 5000) begin @(negedge clk); n++; end
    checks++;
    if (frame_is_key != exp_key) begin failures++; $display("FAIL key flag %0d expected %0d", frame_is_key, exp_key); end
    if (exp_key) exp_ids = '{1, 2, 3, 4};
    else         exp_ids = '{5, 6, 7};
    checks++;
    if (log_q != exp_ids) begin
      failures++;
      $display("FAIL dispatch order for %s frame", exp_key ? "key" : "non-key");
    end
    @(negedge clk);
  endtask

  initial begin
    imem_we = 0; imem_addr = 0; imem_wdata = '0; frame_start = 0;
    cfg_pw = 0; cfg_key_pc = 0; cfg_nonkey_pc = 10;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // key-frame program
    load(0, mk(OP_DMA, 0, 1));
    load(1, mk(OP_GEMM, 1, 2));
    load(2, mk(OP_SCALAR, 0, 3));
    load(3, mk(OP_SYNC, 0, 0));
    load(4, mk(OP_DMA, 1, 4));
    load(5, mk(OP_END, 0, 0));
    // non-key-frame program
    load(10, mk(OP_SCALAR, 1, 5));
    load(11, mk(OP_GEMM, 0, 6));
    load(12, mk(OP_NOP, 0, 0));
    load(13, mk(OP_GEMM, 0, 7));
    load(14, mk(OP_END, 0, 0));
    for (int f = 0; f < 10; f++) frame(f % 4 == 0);
    checks++;
    if (issue_stalls == 0) begin failures++; $display("FAIL no issue stall"); end
    // window of two frames; the window counter stands at 2 after ten
    // frames, which is past the new window, so the next frame is not a key
    // frame and the one after it starts a new window
    cfg_pw = 2;
    for (int f = 0; f < 6; f++) frame(f % 2 == 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
