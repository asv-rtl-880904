// asv_top: the ASV stereo-vision accelerator.
//
// A systolic DNN accelerator extended for stereo vision. Key frames run a
// stereo DNN (convolutions, and deconvolutions decomposed offline into dense
// sub-convolutions whose outputs are interleaved by strided stores); non-key
// frames run dense optical flow (Gaussian blur on the array, Matrix Update and
// Compute Flow in the scalar unit), propagate the key frame's correspondences
// along the motion, and refine them with SAD block matching on the array plus
// a minimum search. The controller picks which program a frame runs.
//
//   controller --jobs--> DMA, systolic array sequencer (+ array), scalar unit
//   DMA, array sequencer, scalar unit <--> global buffer (3 ports, banked)
//   DMA <--> off-chip DRAM (port brought out; the DRAM is outside the chip)
//
// Global buffer port priority: array sequencer, then scalar unit, then DMA.
// The scalar unit's lanes advance on one clock in SCALAR_DIV (250 MHz against
// the array's 1 GHz in the reference configuration); everything else runs on
// clk.
//
// Follows the paper: the block diagram (controller, DMA, systolic array,
// scalar unit, global buffer, DRAM), a 24x24 PE array, 8 scalar lanes, a
// 1.5 MB buffer in 128 KB banks, and static key-frame selection. This
// design's own choices: the job/instruction formats, the buffer port
// arbitration and the single clock with a lane clock enable.
//
// Interface: load the schedule through imem_*, set cfg_*, then pulse
// frame_start once per frame; frame_done pulses when the frame's program
// reached OP_END with all units idle. The DRAM port follows asv_dma.
// Statistics: stat_issue_stalls counts cycles an instruction waited for a busy
// unit and stat_buf_conflicts counts buffer requests that lost a bank
// conflict. The array sequencer's own stall counter is left unconnected
// here (verilator reports it unused): the sequencer has the highest buffer
// priority and never waits in this configuration.
module asv_top
  import asv_pkg::*;
#(
  parameter int unsigned ROWS       = 24,
  parameter int unsigned COLS       = 24,
  parameter int unsigned KMAX       = 256,
  parameter int unsigned LANES      = 8,
  parameter int unsigned BANKS      = 12,
  parameter int unsigned BANK_WORDS = 65536,
  parameter int unsigned IMEM_DEPTH = 256,
  parameter int unsigned PW         = 4,
  parameter int unsigned SCALAR_DIV = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  // schedule and configuration
  input  logic          imem_we,
  input  logic [$clog2(IMEM_DEPTH)-1:0] imem_addr,
  input  instr_t        imem_wdata,
  input  logic [7:0]    cfg_pw,
  input  logic [$clog2(IMEM_DEPTH)-1:0] cfg_key_pc,
  input  logic [$clog2(IMEM_DEPTH)-1:0] cfg_nonkey_pc,
  // frames
  input  logic          frame_start,
  output logic          frame_busy,
  output logic          frame_done,
  output logic          frame_is_key,
  // statistics
  output logic [31:0]   stat_issue_stalls,
  output logic [31:0]   stat_buf_conflicts,
  // off-chip DRAM
  output logic          dram_req,
  output logic          dram_we,
  output daddr_t        dram_addr,
  output data_t         dram_wdata,
  input  logic          dram_gnt,
  input  logic          dram_rvalid,
  input  data_t         dram_rdata
);

  // lane clock enable
  logic [31:0] array_stalls;
  logic [7:0] div_cnt;
  logic       sc_ce;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                            div_cnt <= '0;
    else if (div_cnt == 8'(SCALAR_DIV - 1)) div_cnt <= '0;
    else                                   div_cnt <= div_cnt + 1;
  end
  assign sc_ce = (div_cnt == 0);

  dma_job_t    dma_job;
  gemm_job_t   gemm_job;
  scalar_job_t sc_job;
  logic dma_start, dma_busy, dma_done;
  logic gemm_start, gemm_busy, gemm_done;
  logic sc_start, sc_busy, sc_done;

  buf_req_t bq [3];
  buf_rsp_t bs [3];

  asv_controller #(.IMEM_DEPTH(IMEM_DEPTH), .PW(PW)) u_ctrl (
    .clk, .rst_n,
    .imem_we, .imem_addr, .imem_wdata,
    .cfg_pw, .cfg_key_pc, .cfg_nonkey_pc,
    .frame_start, .frame_busy, .frame_done, .frame_is_key,
    .issue_stalls (stat_issue_stalls),
    .dma_start, .dma_job, .dma_busy, .dma_done,
    .gemm_start, .gemm_job, .gemm_busy, .gemm_done,
    .sc_start, .sc_job, .sc_busy, .sc_done
  );

  asv_array_engine #(.ROWS(ROWS), .COLS(COLS), .KMAX(KMAX)) u_array (
    .clk, .rst_n,
    .start        (gemm_start),
    .job          (gemm_job),
    .busy         (gemm_busy),
    .done         (gemm_done),
    .bq           (bq[0]),
    .bs           (bs[0]),
    .stall_cycles (array_stalls)
  );

  asv_scalar_unit #(.LANES(LANES)) u_scalar (
    .clk, .rst_n,
    .ce    (sc_ce),
    .start (sc_start),
    .job   (sc_job),
    .busy  (sc_busy),
    .done  (sc_done),
    .bq    (bq[1]),
    .bs    (bs[1])
  );

  asv_dma u_dma (
    .clk, .rst_n,
    .start (dma_start),
    .job   (dma_job),
    .busy  (dma_busy),
    .done  (dma_done),
    .bq    (bq[2]),
    .bs    (bs[2]),
    .dram_req, .dram_we, .dram_addr, .dram_wdata,
    .dram_gnt, .dram_rvalid, .dram_rdata
  );

  asv_global_buffer #(.NPORTS(3), .BANKS(BANKS), .BANK_WORDS(BANK_WORDS)) u_buf (
    .clk, .rst_n,
    .req             (bq),
    .rsp             (bs),
    .conflict_cycles (stat_buf_conflicts)
  );

endmodule
