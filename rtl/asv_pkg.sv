// asv_pkg: types and constants shared by the ASV stereo-vision accelerator.
//
// Data are 16-bit signed fixed-point words and accumulators are 32 bits wide,
// as in the processing element the design is built around. Everything else
// here (buffer address width, the buffer request/response bundle, the job and
// instruction encodings) is this implementation's own choice: the execution
// schedule format of the accelerator is not published, so a simple one is
// defined below.
package asv_pkg;

  // ---------------------------------------------------------------- widths
  localparam int unsigned DATA_W  = 16;  // operand width of a PE
  localparam int unsigned ACC_W   = 32;  // PE accumulator width
  localparam int unsigned BUF_AW  = 20;  // word address into the global buffer
  localparam int unsigned DRAM_AW = 32;  // word address into off-chip memory
  localparam int unsigned FRAC    = 8;   // fraction bits of the scalar unit's Q8.8 values

  typedef logic signed [DATA_W-1:0] data_t;
  typedef logic signed [ACC_W-1:0]  acc_t;
  typedef logic [BUF_AW-1:0]        baddr_t;
  typedef logic [DRAM_AW-1:0]       daddr_t;

  // ------------------------------------------------ global buffer port bundle
  // A client holds req (and we/addr/wdata) until it sees gnt in the same cycle.
  // A granted read returns rdata with rvalid exactly one cycle later.
  typedef struct packed {
    logic   req;
    logic   we;
    baddr_t addr;
    data_t  wdata;
  } buf_req_t;

  typedef struct packed {
    logic  gnt;
    logic  rvalid;
    data_t rdata;
  } buf_rsp_t;

  // ---------------------------------------------------------------- PE modes
  typedef enum logic {
    PE_MAC = 1'b0,   // acc += a * b
    PE_SAD = 1'b1    // acc += |a - b|
  } pe_mode_e;

  // ------------------------------------------------------------ array job
  // One tile: C[m][n] = sum_k f(A[m][k], B[k][n]) for m < M, n < N, k < K.
  //   A(m,k) is read from a_base + m*a_stride + k   (one im2col window per row)
  //   B(k,n) is read from b_base + n*b_stride + k   (one filter per column)
  //   C(m,n) is written to o_base + m*o_rstride + n*o_cstride, after an
  //   arithmetic right shift by 'shift' and saturation to 16 bits.
  // Strides of 2 in o_rstride/o_cstride scatter a sub-convolution's outputs
  // into their places in a deconvolution's ofmap (the gather step).
  typedef struct packed {
    pe_mode_e    mode;
    logic [4:0]  shift;
    baddr_t      a_base;
    logic [15:0] a_stride;
    baddr_t      b_base;
    logic [15:0] b_stride;
    logic [7:0]  m;
    logic [7:0]  n;
    logic [15:0] k;
    baddr_t      o_base;
    logic [15:0] o_rstride;
    logic [15:0] o_cstride;
  } gemm_job_t;

  // ------------------------------------------------------- scalar unit job
  typedef enum logic [2:0] {
    SC_RELU   = 3'd0,  // 1 in -> 1 out : max(x, 0)
    SC_MAX2   = 3'd1,  // 2 in -> 1 out : max(x0, x1), one step of max pooling
    SC_FLOW   = 3'd2,  // 5 in -> 2 out : Compute Flow (optical flow)
    SC_MATUPD = 3'd3,  // 12 in -> 5 out: Matrix Update (optical flow)
    SC_PROP   = 3'd4,  // 3 in -> 1 out : propagate a disparity along motion
    SC_ARGMIN = 3'd5   // group in -> 1 out: block-matching best candidate
  } sc_op_e;

  // Item i of a lane operation reads its operands from src + i*n_in + s and
  // writes its results to dst + i*n_out + s. For SC_MATUPD item i is pixel
  // (i mod width, i div width) of a width x height frame. For SC_ARGMIN
  // every 'group' consecutive words are one pixel's candidate costs; the
  // result is disp_base + index of the smallest.
  typedef struct packed {
    sc_op_e       op;
    baddr_t       src;
    baddr_t       dst;
    logic [19:0]  count;
    logic [11:0]  width;
    logic [11:0]  height;
    logic [7:0]   group;
    data_t        disp_base;
  } scalar_job_t;

  // ---------------------------------------------------------------- DMA job
  typedef struct packed {
    logic        store;     // 0: DRAM -> buffer, 1: buffer -> DRAM
    daddr_t      dram_addr;
    baddr_t      buf_addr;
    logic [19:0] len;       // words
  } dma_job_t;

  // ------------------------------------------------------------ instruction
  typedef enum logic [2:0] {
    OP_END    = 3'd0,  // wait until all units are idle, then the frame is done
    OP_DMA    = 3'd1,
    OP_GEMM   = 3'd2,
    OP_SCALAR = 3'd3,
    OP_SYNC   = 3'd4,  // wait until all units are idle
    OP_NOP    = 3'd5
  } opcode_e;

  localparam int unsigned PAYLOAD_W = 200;

  typedef struct packed {
    opcode_e                opcode;
    logic                   wait_done;  // block until this unit finishes
    logic [PAYLOAD_W-1:0]   payload;    // a job, right-aligned
  } instr_t;


  // Number of operand / result words of a lane operation.
  function automatic int unsigned sc_n_in(sc_op_e op);
    case (op)
      SC_RELU:   return 1;
      SC_MAX2:   return 2;
      SC_FLOW:   return 5;
      SC_MATUPD: return 12;
      SC_PROP:   return 3;
      default:   return 1;
    endcase
  endfunction

  function automatic int unsigned sc_n_out(sc_op_e op);
    case (op)
      SC_FLOW:   return 2;
      SC_MATUPD: return 5;
      default:   return 1;
    endcase
  endfunction

  // Saturate a wide signed value to 16 bits.
  function automatic data_t sat16(input logic signed [63:0] v);
    if (v > 64'sd32767)       return 16'sh7fff;
    else if (v < -64'sd32768) return 16'sh8000;
    else                      return data_t'(v);
  endfunction

endpackage
