// asv_scalar_unit: the point-wise unit beside the systolic array.
//
// LANES lanes (asv_scalar_lane) apply ReLU, pooling, the optical-flow
// Compute Flow and Matrix Update operations, or correspondence propagation to
// up to LANES items at a time; the block-matching comparator (asv_argmin)
// picks each pixel's best disparity from its candidate SAD values.
//
// A lane job (asv_pkg::scalar_job_t) over 'count' items runs in batches of
// LANES items:
//   GATHER  read the batch's operands, n_in words per item, consecutive from
//           src (items are stored one after another), into the lanes' inputs;
//   EXEC    start the lanes and wait until all are done;
//   SCATTER write n_out results per item, consecutive from dst.
// An SC_ARGMIN job reads 'group' costs per pixel, streams them through the
// comparator and writes disp_base + best index for each pixel.
//
// Follows the paper: 8 parallel lanes each able to do ReLU, Matrix Update and
// Compute Flow, the lanes running at 250 MHz against the array's 1 GHz, and
// extra comparison logic for block matching. This design's own choices: the
// job format and data layout, buffer access one word per cycle at the fast
// clock, and the lanes' clock enable 'ce' (high one cycle in four) standing
// for the slower lane clock.
//
// Interface: 'start' with 'job' while idle begins a job; 'done' pulses for one
// cycle at its end.
//
// Lint note: lane counters are $clog2(LANES+1) bits so that they can hold the
// batch size LANES itself; where such a counter (or the 4-bit operand slot
// counter) indexes a LANES- or 8-entry array verilator reports a width
// truncation. The index never exceeds the array bound when it is used.
module asv_scalar_unit
  import asv_pkg::*;
#(
  parameter int unsigned LANES = 8
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        ce,
  input  logic        start,
  input  scalar_job_t job,
  output logic        busy,
  output logic        done,
  output buf_req_t    bq,
  input  buf_rsp_t    bs
);

  typedef enum logic [2:0] {
    S_IDLE, S_GATHER, S_EXEC, S_WAIT, S_SCATTER, S_AM_READ, S_AM_WRITE
  } state_e;

  state_e      state;
  scalar_job_t j;
  logic [3:0]  n_in, n_out;
  assign n_in  = 4'(sc_n_in(j.op));
  assign n_out = 4'(sc_n_out(j.op));

  localparam int unsigned LW = $clog2(LANES + 1);

  logic [19:0] items_left;
  logic [LW-1:0] nl;               // items in this batch
  baddr_t      src_ptr, dst_ptr;
  logic [7:0]  iss_g, rcv_g;       // flat word index inside the batch
  logic [LW-1:0] rcv_l;            // lane being filled
  logic [3:0]  rcv_s;              // operand slot being filled
  logic [LW-1:0] wr_l;
  logic [3:0]  wr_s;
  logic [7:0]  batch_words_in;
  logic [11:0] cur_x, cur_y;

  data_t       lane_in  [LANES][12];
  data_t       lane_out [LANES][5];
  logic [11:0] lane_x   [LANES];
  logic [11:0] lane_y   [LANES];
  logic        lane_busy[LANES];
  logic        lane_start;

  assign batch_words_in = 8'(nl) * 8'(n_in);

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    asv_scalar_lane u_lane (
      .clk    (clk),
      .rst_n  (rst_n),
      .ce     (ce),
      .start  (lane_start && (l < int'(nl))),
      .op     (j.op),
      .in     (lane_in[l]),
      .x      (lane_x[l]),
      .y      (lane_y[l]),
      .width  (j.width),
      .height (j.height),
      .busy   (lane_busy[l]),
      .out    (lane_out[l])
    );
  end

  assign lane_start = (state == S_EXEC);

  logic any_lane_busy;
  always_comb begin
    any_lane_busy = 1'b0;
    for (int l = 0; l < LANES; l++) any_lane_busy |= lane_busy[l];
  end

  // ------------------------------------------------ block-matching compare
  logic       am_valid, am_first, am_last, am_out_valid;
  logic [7:0] am_idx;
  data_t      am_cost;
  logic [7:0] am_rcv;
  logic [7:0] am_iss;

  assign am_valid = (state == S_AM_READ) && bs.rvalid;
  assign am_first = (am_rcv == 0);
  assign am_last  = (am_rcv == j.group - 1);

  asv_argmin u_argmin (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (am_valid),
    .in_first  (am_first),
    .in_last   (am_last),
    .in_cost   (bs.rdata),
    .out_valid (am_out_valid),
    .out_idx   (am_idx),
    .out_cost  (am_cost)
  );

  data_t am_result;
  logic  am_have;

  // ------------------------------------------------ buffer port
  always_comb begin
    bq = '0;
    unique case (state)
      S_GATHER: if (iss_g < batch_words_in) begin
        bq.req  = 1'b1;
        bq.addr = src_ptr + baddr_t'(iss_g);
      end
      S_SCATTER: begin
        bq.req   = 1'b1;
        bq.we    = 1'b1;
        bq.addr  = dst_ptr + baddr_t'(8'(wr_l) * 8'(n_out)) + baddr_t'(wr_s);
        bq.wdata = lane_out[wr_l][wr_s[2:0]];
      end
      S_AM_READ: if (am_iss < j.group) begin
        bq.req  = 1'b1;
        bq.addr = src_ptr + baddr_t'(am_iss);
      end
      S_AM_WRITE: if (am_have) begin
        bq.req   = 1'b1;
        bq.we    = 1'b1;
        bq.addr  = dst_ptr;
        bq.wdata = am_result;
      end
      default: ;
    endcase
  end

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      j          <= '0;
      items_left <= '0;
      nl         <= '0;
      src_ptr    <= '0;
      dst_ptr    <= '0;
      iss_g      <= '0;
      rcv_g      <= '0;
      rcv_l      <= '0;
      rcv_s      <= '0;
      wr_l       <= '0;
      wr_s       <= '0;
      cur_x      <= '0;
      cur_y      <= '0;
      am_rcv     <= '0;
      am_iss     <= '0;
      am_result  <= '0;
      am_have    <= 1'b0;
      done       <= 1'b0;
      for (int l = 0; l < LANES; l++) begin
        lane_x[l] <= '0;
        lane_y[l] <= '0;
        for (int s = 0; s < 12; s++) lane_in[l][s] <= '0;
      end
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start) begin
          j          <= job;
          items_left <= job.count;
          src_ptr    <= job.src;
          dst_ptr    <= job.dst;
          cur_x      <= '0;
          cur_y      <= '0;
          am_rcv     <= '0;
          am_iss     <= '0;
          am_have    <= 1'b0;
          iss_g      <= '0; rcv_g <= '0; rcv_l <= '0; rcv_s <= '0;
          nl         <= (job.count > 20'(LANES)) ? LW'(LANES) : LW'(job.count);
          if (job.count == 0) begin
            done <= 1'b1;
          end else begin
            state <= (job.op == SC_ARGMIN) ? S_AM_READ : S_GATHER;
          end
        end

        S_GATHER: begin
          if (bq.req && bs.gnt) iss_g <= iss_g + 1;
          if (bs.rvalid) begin
            lane_in[rcv_l][rcv_s] <= bs.rdata;
            rcv_g <= rcv_g + 1;
            if (rcv_s == n_in - 1) begin
              rcv_s <= '0;
              rcv_l <= rcv_l + 1;
              lane_x[rcv_l] <= cur_x;
              lane_y[rcv_l] <= cur_y;
              if (cur_x == j.width - 1) begin
                cur_x <= '0;
                cur_y <= cur_y + 1;
              end else begin
                cur_x <= cur_x + 1;
              end
            end else begin
              rcv_s <= rcv_s + 1;
            end
            if (rcv_g == batch_words_in - 1) state <= S_EXEC;
          end
        end

        S_EXEC: if (ce) state <= S_WAIT;   // lanes take 'start' on this ce

        S_WAIT: if (!any_lane_busy) begin
          state <= S_SCATTER;
          wr_l  <= '0;
          wr_s  <= '0;
        end

        S_SCATTER: if (bs.gnt) begin
          if (wr_s == n_out - 1) begin
            wr_s <= '0;
            if (wr_l == nl - 1) begin
              // batch finished
              src_ptr    <= src_ptr + baddr_t'(batch_words_in);
              dst_ptr    <= dst_ptr + baddr_t'(8'(nl) * 8'(n_out));
              items_left <= items_left - 20'(nl);
              iss_g <= '0; rcv_g <= '0; rcv_l <= '0; rcv_s <= '0;
              if (items_left == 20'(nl)) begin
                state <= S_IDLE;
                done  <= 1'b1;
              end else begin
                state <= S_GATHER;
                nl    <= (items_left - 20'(nl) > 20'(LANES)) ? LW'(LANES)
                                                            : LW'(items_left - 20'(nl));
              end
            end else begin
              wr_l <= wr_l + 1;
            end
          end else begin
            wr_s <= wr_s + 1;
          end
        end

        S_AM_READ: begin
          if (bq.req && bs.gnt) am_iss <= am_iss + 1;
          if (bs.rvalid) begin
            am_rcv <= am_last ? 8'd0 : am_rcv + 1;
            if (am_last) state <= S_AM_WRITE;
          end
        end

        S_AM_WRITE: begin
          if (am_out_valid) begin
            am_result <= sat16(64'(j.disp_base) + 64'(am_idx));
            am_have   <= 1'b1;
          end
          if (am_have && bs.gnt) begin
            am_have    <= 1'b0;
            am_iss     <= '0;
            src_ptr    <= src_ptr + baddr_t'(j.group);
            dst_ptr    <= dst_ptr + 1;
            items_left <= items_left - 1;
            if (items_left == 1) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              state <= S_AM_READ;
            end
          end
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n && start && state == S_IDLE && job.op == SC_ARGMIN)
      assert (job.group != 0) else $error("argmin job with empty group");
  end

  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (bq.req && !bs.gnt) |=> (bq.req && $stable(bq.addr)));

endmodule
