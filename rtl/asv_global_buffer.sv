// asv_global_buffer: the accelerator's unified on-chip scratchpad.
//
// BANKS single-port banks of BANK_WORDS 16-bit words (12 x 64 Ki words =
// 12 x 128 KB = 1.5 MB by default), shared by NPORTS clients (DMA, systolic
// array sequencer, scalar unit). The word address selects the bank in its
// upper bits and the word within the bank in its lower bits, so consecutive
// addresses stay in one bank and different data regions can be placed in
// different banks. Each cycle every bank serves at most one client: among
// the clients that address a bank, the lowest-numbered port wins and the
// others see gnt low and must hold their request (a stall). Different banks
// serve different clients in the same cycle.
//
// Follows the paper: one 1.5 MB buffer, banked at 128 KB, holding ifmap,
// kernels and ofmap for key frames and pixels, Gaussian kernel, motion
// vectors and disparity maps for non-key frames, partitioned by software.
// This design's own choices: 16-bit words, bank selection by upper address
// bits, fixed-priority arbitration and the request/grant handshake.
//
// Timing: a read granted in cycle t returns rdata with rvalid in cycle t+1.
// 'conflict_cycles' counts client-cycles lost to bank conflicts.
module asv_global_buffer
  import asv_pkg::*;
#(
  parameter int unsigned NPORTS     = 3,
  parameter int unsigned BANKS      = 12,
  parameter int unsigned BANK_WORDS = 65536
) (
  input  logic        clk,
  input  logic        rst_n,
  input  buf_req_t    req [NPORTS],
  output buf_rsp_t    rsp [NPORTS],
  output logic [31:0] conflict_cycles
);

  localparam int unsigned OFFW = $clog2(BANK_WORDS);
  localparam int unsigned BW   = BUF_AW - OFFW;

  logic [BW-1:0]   bank_of [NPORTS];
  logic [OFFW-1:0] off_of  [NPORTS];
  logic            gnt     [NPORTS];

  logic            b_en    [BANKS];
  logic            b_we    [BANKS];
  logic [OFFW-1:0] b_addr  [BANKS];
  data_t           b_wdata [BANKS];
  data_t           b_rdata [BANKS];

  always_comb begin
    for (int p = 0; p < NPORTS; p++) begin
      bank_of[p] = req[p].addr[BUF_AW-1:OFFW];
      off_of[p]  = req[p].addr[OFFW-1:0];
      gnt[p]     = 1'b0;
    end
    for (int b = 0; b < BANKS; b++) begin
      b_en[b]    = 1'b0;
      b_we[b]    = 1'b0;
      b_addr[b]  = '0;
      b_wdata[b] = '0;
      // fixed priority: scan from the highest port down so port 0 wins last
      for (int p = NPORTS - 1; p >= 0; p--) begin
        if (req[p].req && int'(bank_of[p]) == b) begin
          b_en[b]    = 1'b1;
          b_we[b]    = req[p].we;
          b_addr[b]  = off_of[p];
          b_wdata[b] = req[p].wdata;
        end
      end
    end
    // a port is granted when no lower-numbered port requests the same bank
    for (int p = 0; p < NPORTS; p++) begin
      gnt[p] = req[p].req && (int'(bank_of[p]) < BANKS);
      for (int q = 0; q < p; q++)
        if (req[q].req && bank_of[q] == bank_of[p]) gnt[p] = 1'b0;
    end
  end

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    asv_sram_bank #(.WORDS(BANK_WORDS)) u_bank (
      .clk   (clk),
      .en    (b_en[b]),
      .we    (b_we[b]),
      .addr  (b_addr[b]),
      .wdata (b_wdata[b]),
      .rdata (b_rdata[b])
    );
  end

  // read return path
  logic          rd_q   [NPORTS];
  logic [BW-1:0] bank_q [NPORTS];
  logic [31:0]   lost;

  always_comb begin
    lost = '0;
    for (int p = 0; p < NPORTS; p++)
      if (req[p].req && !gnt[p]) lost = lost + 1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NPORTS; p++) begin
        rd_q[p]   <= 1'b0;
        bank_q[p] <= '0;
      end
      conflict_cycles <= '0;
    end else begin
      for (int p = 0; p < NPORTS; p++) begin
        rd_q[p]   <= gnt[p] && !req[p].we;
        bank_q[p] <= bank_of[p];
      end
      conflict_cycles <= conflict_cycles + lost;
    end
  end

  always_comb begin
    for (int p = 0; p < NPORTS; p++) begin
      rsp[p].gnt    = gnt[p];
      rsp[p].rvalid = rd_q[p];
      rsp[p].rdata  = (int'(bank_q[p]) < BANKS) ? b_rdata[bank_q[p]] : '0;
    end
  end

  // Every request must address an existing bank.
  for (genvar p = 0; p < NPORTS; p++) begin : g_chk
    a_range: assert property (@(posedge clk) disable iff (!rst_n)
                              req[p].req |-> int'(bank_of[p]) < BANKS);
  end

endmodule
