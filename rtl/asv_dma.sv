// asv_dma: DMA engine between off-chip DRAM and the global buffer.
//
// A job (asv_pkg::dma_job_t) moves 'len' consecutive 16-bit words. A load
// copies DRAM[dram_addr + i] to buffer[buf_addr + i]; a store copies the other
// way. The engine moves one word at a time: it reads a word from the source
// (request held until granted, data one or more cycles later with rvalid),
// then writes it to the destination (request held until granted).
//
// Follows the paper: a DMA engine coordinates transfers between the global
// buffer and off-chip memory, and runs alongside the compute units so that
// the next tile is fetched while the current one is computed. This design's
// own choices: the job format, one word in flight, and the DRAM port: a
// request/grant word interface (dram_req/dram_we/dram_addr/dram_wdata,
// answered by dram_gnt and, for reads, dram_rvalid/dram_rdata any number of
// cycles later, in order). A real LPDDR3 controller and PHY would sit behind
// this port.
//
// Interface: 'start' with 'job' while idle begins a job; 'done' pulses for
// one cycle when the last word has been written.
module asv_dma
  import asv_pkg::*;
(
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  dma_job_t  job,
  output logic      busy,
  output logic      done,
  // global buffer port
  output buf_req_t  bq,
  input  buf_rsp_t  bs,
  // DRAM port
  output logic      dram_req,
  output logic      dram_we,
  output daddr_t    dram_addr,
  output data_t     dram_wdata,
  input  logic      dram_gnt,
  input  logic      dram_rvalid,
  input  data_t     dram_rdata
);

  typedef enum logic [1:0] {ST_IDLE, ST_RD, ST_RWAIT, ST_WR} state_e;

  state_e      state;
  dma_job_t    j;
  logic [19:0] idx;
  data_t       word;

  assign busy = (state != ST_IDLE);

  // read side: DRAM for loads, buffer for stores
  always_comb begin
    bq         = '0;
    dram_req   = 1'b0;
    dram_we    = 1'b0;
    dram_addr  = j.dram_addr + daddr_t'(idx);
    dram_wdata = word;
    if (state == ST_RD) begin
      if (j.store) begin
        bq.req  = 1'b1;
        bq.addr = j.buf_addr + baddr_t'(idx);
      end else begin
        dram_req = 1'b1;
      end
    end else if (state == ST_WR) begin
      if (j.store) begin
        dram_req = 1'b1;
        dram_we  = 1'b1;
      end else begin
        bq.req   = 1'b1;
        bq.we    = 1'b1;
        bq.addr  = j.buf_addr + baddr_t'(idx);
        bq.wdata = word;
      end
    end
  end

  logic rd_gnt, rd_valid, wr_gnt;
  data_t rd_data;
  assign rd_gnt   = j.store ? bs.gnt    : dram_gnt;
  assign rd_valid = j.store ? bs.rvalid : dram_rvalid;
  assign rd_data  = j.store ? bs.rdata  : dram_rdata;
  assign wr_gnt   = j.store ? dram_gnt  : bs.gnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= ST_IDLE;
      j     <= '0;
      idx   <= '0;
      word  <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        ST_IDLE: if (start) begin
          j     <= job;
          idx   <= '0;
          state <= (job.len == 0) ? ST_IDLE : ST_RD;
          done  <= (job.len == 0);
        end
        ST_RD:    if (rd_gnt) state <= ST_RWAIT;
        ST_RWAIT: if (rd_valid) begin
          word  <= rd_data;
          state <= ST_WR;
        end
        ST_WR: if (wr_gnt) begin
          if (idx == j.len - 1) begin
            state <= ST_IDLE;
            done  <= 1'b1;
          end else begin
            idx   <= idx + 1;
            state <= ST_RD;
          end
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  a_dram_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (dram_req && !dram_gnt) |=> (dram_req && $stable(dram_addr) && $stable(dram_we)));
  a_buf_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (bq.req && !bs.gnt) |=> (bq.req && $stable(bq.addr)));

endmodule
