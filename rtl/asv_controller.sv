// asv_controller: the micro-sequencer.
//
// It runs the execution schedule prepared offline (layer mapping, tiling and
// buffer partitioning are decided in software) from an instruction memory of
// IMEM_DEPTH entries (asv_pkg::instr_t), and it chooses key frames.
//
// Key frames: with a propagation window of cfg_pw frames, the first frame of
// every window is a key frame (frames 0, PW, 2PW, ...). On frame_start the
// controller starts at cfg_key_pc for a key frame (stereo DNN inference) or
// at cfg_nonkey_pc for a non-key frame (optical flow, propagation and block
// matching), and runs until an OP_END instruction.
//
// Instructions run in order. OP_DMA, OP_GEMM and OP_SCALAR hand a job to the
// DMA, the systolic array sequencer or the scalar unit; if that unit is still
// busy the controller stalls until it is free. With wait_done set the
// controller also waits for the job to finish; without it the next
// instruction is issued at once, so a DMA transfer for the next tile can
// overlap the computation of the current one (double buffering). OP_SYNC
// waits until all units are idle; OP_END does the same and ends the frame.
//
// Follows the paper: a micro-sequencer coordinating computation and memory
// accesses, an offline execution schedule, and a statically set key-frame
// window (the evaluated main setting is PW-4, every fourth frame a key frame).
// This design's own choices: the instruction format, the instruction memory
// loaded through imem_we/imem_addr/imem_wdata, and the two entry points.
//
// Timing: one instruction issued per cycle at most; frame_done pulses one
// cycle after the units are idle at OP_END. frame_is_key holds for the frame.
module asv_controller
  import asv_pkg::*;
#(
  parameter int unsigned IMEM_DEPTH = 256,
  parameter int unsigned PW         = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  // schedule loading
  input  logic          imem_we,
  input  logic [$clog2(IMEM_DEPTH)-1:0] imem_addr,
  input  instr_t        imem_wdata,
  // configuration
  input  logic [7:0]    cfg_pw,          // 0 selects the default PW
  input  logic [$clog2(IMEM_DEPTH)-1:0] cfg_key_pc,
  input  logic [$clog2(IMEM_DEPTH)-1:0] cfg_nonkey_pc,
  // frames
  input  logic          frame_start,
  output logic          frame_busy,
  output logic          frame_done,
  output logic          frame_is_key,
  output logic [31:0]   issue_stalls,    // cycles an instruction waited for a busy unit
  // units
  output logic          dma_start,
  output dma_job_t      dma_job,
  input  logic          dma_busy,
  input  logic          dma_done,
  output logic          gemm_start,
  output gemm_job_t     gemm_job,
  input  logic          gemm_busy,
  input  logic          gemm_done,
  output logic          sc_start,
  output scalar_job_t   sc_job,
  input  logic          sc_busy,
  input  logic          sc_done
);

  localparam int unsigned AW = $clog2(IMEM_DEPTH);

  typedef enum logic [2:0] {C_IDLE, C_RUN, C_WAIT_DMA, C_WAIT_GEMM, C_WAIT_SC, C_DONE} cstate_e;

  instr_t  imem [IMEM_DEPTH];
  cstate_e state;
  logic [AW-1:0] pc;
  logic [7:0]    win_cnt;
  logic [7:0]    pw_eff;
  instr_t        ins;
  logic          all_idle;

  assign pw_eff   = (cfg_pw == 0) ? 8'(PW) : cfg_pw;
  assign ins      = imem[pc];
  assign all_idle = !dma_busy && !gemm_busy && !sc_busy;

  assign dma_job  = dma_job_t'(ins.payload[$bits(dma_job_t)-1:0]);
  assign gemm_job = gemm_job_t'(ins.payload[$bits(gemm_job_t)-1:0]);
  assign sc_job   = scalar_job_t'(ins.payload[$bits(scalar_job_t)-1:0]);

  // issue decision for the instruction at pc
  logic issue, unit_busy;
  always_comb begin
    unit_busy = 1'b0;
    unique case (ins.opcode)
      OP_DMA:    unit_busy = dma_busy;
      OP_GEMM:   unit_busy = gemm_busy;
      OP_SCALAR: unit_busy = sc_busy;
      OP_SYNC,
      OP_END:    unit_busy = !all_idle;
      default:   unit_busy = 1'b0;
    endcase
    issue      = (state == C_RUN) && !unit_busy;
    dma_start  = issue && ins.opcode == OP_DMA;
    gemm_start = issue && ins.opcode == OP_GEMM;
    sc_start   = issue && ins.opcode == OP_SCALAR;
  end

  assign frame_busy = (state != C_IDLE);

  always_ff @(posedge clk) begin
    if (imem_we) imem[imem_addr] <= imem_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= C_IDLE;
      pc           <= '0;
      win_cnt      <= '0;
      frame_is_key <= 1'b0;
      frame_done   <= 1'b0;
      issue_stalls <= '0;
    end else begin
      frame_done <= 1'b0;
      if (state == C_RUN && unit_busy &&
          (ins.opcode == OP_DMA || ins.opcode == OP_GEMM || ins.opcode == OP_SCALAR))
        issue_stalls <= issue_stalls + 1;
      unique case (state)
        C_IDLE: if (frame_start) begin
          frame_is_key <= (win_cnt == 0);
          pc           <= (win_cnt == 0) ? cfg_key_pc : cfg_nonkey_pc;
          win_cnt      <= (win_cnt >= pw_eff - 1) ? 8'd0 : win_cnt + 1;
          state        <= C_RUN;
        end
        C_RUN: if (issue) begin
          if (ins.opcode == OP_END) begin
            state      <= C_IDLE;
            frame_done <= 1'b1;
          end else begin
            pc <= pc + 1;
            if (ins.wait_done) begin
              unique case (ins.opcode)
                OP_DMA:    state <= C_WAIT_DMA;
                OP_GEMM:   state <= C_WAIT_GEMM;
                OP_SCALAR: state <= C_WAIT_SC;
                default:   state <= C_RUN;
              endcase
            end
          end
        end
        C_WAIT_DMA:  if (dma_done)  state <= C_RUN;
        C_WAIT_GEMM: if (gemm_done) state <= C_RUN;
        C_WAIT_SC:   if (sc_done)   state <= C_RUN;
        default:     state <= C_IDLE;
      endcase
    end
  end

endmodule
