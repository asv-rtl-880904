// asv_array_engine: runs one tile of a convolution or block-matching layer
// on the systolic array.
//
// A job (asv_pkg::gemm_job_t) asks for C[m][n] = sum_k f(A[m][k], B[k][n]),
// m < M <= ROWS, n < N <= COLS, k < K < 65536, with f = multiply (convolution,
// Gaussian blur) or absolute difference (block-matching SAD). K is processed
// in chunks of at most KMAX (the depth of the local operand stores); the
// accumulators keep their sums from one chunk to the next. The engine
//   1. LOAD_A / LOAD_B: reads the chunk of A and B word by word from the
//      global buffer into the local operand stores (one read issued per
//      granted cycle, pipelined),
//   2. CLEAR: zeroes the accumulators (first chunk only),
//   3. STREAM: feeds the skewed operand streams for exactly Kc+ROWS+COLS-2
//      cycles, Kc being the chunk length; if K is not exhausted it returns
//      to step 1 for the next chunk,
//   4. WRITE: drains the array one row per step (bottom row first) and writes
//      each result, shifted right by 'shift' and saturated to 16 bits, to
//      o_base + m*o_rstride + n*o_cstride.
// Output strides of 2 place the results of one deconvolution sub-kernel on
// its own phase of the ofmap: this is the gather that reassembles an ofmap
// from the dense sub-convolutions of a decomposed deconvolution.
//
// Follows the paper: convolution-style execution of conv, deconvolution
// sub-kernels, Gaussian blur and SAD block matching on one array, and the
// gather as plain buffer writes. This design's own choices: the job format,
// local operand stores of KMAX words per row/column, one buffer word per
// cycle, and saturation of results to 16 bits.
//
// Interface: 'start' with 'job' while idle begins a job; 'done' pulses for one
// cycle at the end. 'stall_cycles' counts cycles in which a buffer request was
// not granted (bank conflicts).
//
// Lint note: the write-phase column counter is 8 bits wide (the job's n field)
// and indexes the COLS-entry result vector, so verilator reports a width
// truncation on that index; the counter never exceeds n-1 < COLS.
module asv_array_engine
  import asv_pkg::*;
#(
  parameter int unsigned ROWS = 24,
  parameter int unsigned COLS = 24,
  parameter int unsigned KMAX = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  gemm_job_t   job,
  output logic        busy,
  output logic        done,
  output buf_req_t    bq,
  input  buf_rsp_t    bs,
  output logic [31:0] stall_cycles
);

  typedef enum logic [2:0] {
    ST_IDLE, ST_LOAD_A, ST_LOAD_B, ST_CLEAR, ST_STREAM, ST_WRITE, ST_DRAIN
  } state_e;

  localparam int unsigned KW = $clog2(KMAX + 1);

  state_e    state;
  gemm_job_t j;

  data_t a_mem [ROWS][KMAX];
  data_t b_mem [KMAX][COLS];

  // issue-side and receive-side counters for the load phases
  logic [7:0]  iss_o, rcv_o;       // outer index (m or n)
  logic [15:0] iss_k, rcv_k;       // inner index (k)
  logic        iss_done;
  baddr_t      iss_row;            // address of element (outer, 0)
  logic [15:0] t;                  // stream cycle
  logic [7:0]  wr_row, wr_col;     // write phase position
  logic [15:0] k_off;              // first k of the current chunk
  logic [15:0] kc;                 // length of the current chunk

  data_t a_west  [ROWS];
  data_t b_north [COLS];
  acc_t  south   [COLS];
  logic  arr_en, arr_clear, arr_drain;

  asv_systolic_array #(.ROWS(ROWS), .COLS(COLS)) u_array (
    .clk       (clk),
    .rst_n     (rst_n),
    .mode      (j.mode),
    .en        (arr_en),
    .clear     (arr_clear),
    .drain     (arr_drain),
    .a_west    (a_west),
    .b_north   (b_north),
    .south_acc (south)
  );

  // ---------------------------------------------------------- skewed feed
  always_comb begin
    for (int i = 0; i < ROWS; i++) begin
      int kk;
      kk = int'(t) - i;
      a_west[i] = '0;
      if (state == ST_STREAM && kk >= 0 && kk < int'(kc) && i < int'(j.m))
        a_west[i] = a_mem[i][kk];
    end
    for (int c = 0; c < COLS; c++) begin
      int kk;
      kk = int'(t) - c;
      b_north[c] = '0;
      if (state == ST_STREAM && kk >= 0 && kk < int'(kc) && c < int'(j.n))
        b_north[c] = b_mem[kk][c];
    end
  end

  localparam logic [15:0] STREAM_LEN_BASE = 16'(ROWS + COLS - 2);

  assign arr_en    = (state == ST_STREAM);
  assign arr_clear = (state == ST_CLEAR);
  assign arr_drain = (state == ST_DRAIN);
  assign busy      = (state != ST_IDLE);

  // ---------------------------------------------------------- buffer port
  logic   is_load;
  data_t  wr_data;
  acc_t   shifted;
  assign is_load = (state == ST_LOAD_A) || (state == ST_LOAD_B);
  assign shifted = south[wr_col] >>> j.shift;
  assign wr_data = sat16(64'(shifted));

  always_comb begin
    bq = '0;
    if (is_load && !iss_done) begin
      bq.req  = 1'b1;
      bq.addr = iss_row + baddr_t'(iss_k);
    end else if (state == ST_WRITE) begin
      bq.req   = 1'b1;
      bq.we    = 1'b1;
      bq.addr  = j.o_base + baddr_t'(wr_row * j.o_rstride) + baddr_t'(wr_col * j.o_cstride);
      bq.wdata = wr_data;
    end
  end

  // ---------------------------------------------------------- control
  logic [7:0] n_outer;
  assign n_outer = (state == ST_LOAD_A) ? j.m : j.n;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= ST_IDLE;
      j            <= '0;
      iss_o        <= '0;
      iss_k        <= '0;
      rcv_o        <= '0;
      rcv_k        <= '0;
      iss_done     <= 1'b0;
      iss_row      <= '0;
      t            <= '0;
      wr_row       <= '0;
      wr_col       <= '0;
      k_off        <= '0;
      kc           <= '0;
      done         <= 1'b0;
      stall_cycles <= '0;
    end else begin
      done <= 1'b0;
      if (bq.req && !bs.gnt) stall_cycles <= stall_cycles + 1;

      // issue side of the load phases
      if (is_load && !iss_done && bs.gnt) begin
        if (iss_k == kc - 1) begin
          iss_k <= '0;
          iss_o <= iss_o + 1;
          iss_row <= iss_row + ((state == ST_LOAD_A) ? baddr_t'(j.a_stride) : baddr_t'(j.b_stride));
          if (iss_o == n_outer - 1) iss_done <= 1'b1;
        end else begin
          iss_k <= iss_k + 1;
        end
      end

      // receive side of the load phases
      if (is_load && bs.rvalid) begin
        if (state == ST_LOAD_A) a_mem[rcv_o][rcv_k[KW-1:0]] <= bs.rdata;
        else                    b_mem[rcv_k[KW-1:0]][rcv_o] <= bs.rdata;
        if (rcv_k == kc - 1) begin
          rcv_k <= '0;
          rcv_o <= rcv_o + 1;
        end else begin
          rcv_k <= rcv_k + 1;
        end
      end

      unique case (state)
        ST_IDLE: begin
          if (start) begin
            j        <= job;
            state    <= ST_LOAD_A;
            iss_o    <= '0; iss_k <= '0; rcv_o <= '0; rcv_k <= '0;
            iss_done <= 1'b0;
            iss_row  <= job.a_base;
            k_off    <= '0;
            kc       <= (job.k > 16'(KMAX)) ? 16'(KMAX) : job.k;
          end
        end
        ST_LOAD_A: begin
          if (bs.rvalid && rcv_k == kc - 1 && rcv_o == j.m - 1) begin
            state    <= ST_LOAD_B;
            iss_o    <= '0; iss_k <= '0; rcv_o <= '0; rcv_k <= '0;
            iss_done <= 1'b0;
            iss_row  <= j.b_base + baddr_t'(k_off);
          end
        end
        ST_LOAD_B: begin
          if (bs.rvalid && rcv_k == kc - 1 && rcv_o == j.n - 1) begin
            // later chunks add to the sums of the earlier ones
            state <= (k_off == 0) ? ST_CLEAR : ST_STREAM;
            t     <= '0;
          end
        end
        ST_CLEAR: begin
          state <= ST_STREAM;
          t     <= '0;
        end
        ST_STREAM: begin
          t <= t + 1;
          if (t == kc + STREAM_LEN_BASE - 1) begin
            if (k_off + kc < j.k) begin
              // next chunk of K
              state    <= ST_LOAD_A;
              iss_o    <= '0; iss_k <= '0; rcv_o <= '0; rcv_k <= '0;
              iss_done <= 1'b0;
              iss_row  <= j.a_base + baddr_t'(k_off) + baddr_t'(kc);
              k_off    <= k_off + kc;
              kc       <= (j.k - (k_off + kc) > 16'(KMAX)) ? 16'(KMAX) : j.k - (k_off + kc);
            end else begin
              state  <= (ROWS - 1 < int'(j.m)) ? ST_WRITE : ST_DRAIN;
              wr_row <= 8'(ROWS - 1);
              wr_col <= '0;
            end
          end
        end
        ST_WRITE: begin
          if (bs.gnt) begin
            if (wr_col == j.n - 1) state <= ST_DRAIN;
            else                   wr_col <= wr_col + 1;
          end
        end
        ST_DRAIN: begin
          // the array shifts one row down in this cycle
          wr_col <= '0;
          if (wr_row == 0) begin
            state <= ST_IDLE;
            done  <= 1'b1;
          end else begin
            wr_row <= wr_row - 1;
            state  <= (wr_row - 1 < j.m) ? ST_WRITE : ST_DRAIN;
          end
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  // A job must fit the array and the operand stores.
  a_job_range: assert property (@(posedge clk) disable iff (!rst_n)
      (start && state == ST_IDLE) |-> (job.m >= 1 && int'(job.m) <= ROWS && job.n >= 1
      && int'(job.n) <= COLS && job.k >= 1))
    else $error("array job out of range: m=%0d n=%0d k=%0d", job.m, job.n, job.k);

  // Buffer handshake: a request that was not granted is held unchanged.
  property p_hold;
    @(posedge clk) disable iff (!rst_n) (bq.req && !bs.gnt) |=> (bq.req && $stable(bq.addr));
  endproperty
  a_hold: assert property (p_hold);

endmodule
