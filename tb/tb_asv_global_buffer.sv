// tb_asv_global_buffer: three clients issue random reads and writes to a
// reduced buffer (4 banks of 256 words); checks read data against a reference
// memory, the fixed-priority grant on bank conflicts, parallel service of
// different banks, one-cycle read latency and the conflict counter.
module tb_asv_global_buffer;
  import asv_pkg::*;

  localparam int NP = 3, NB = 4, BWORDS = 256;

  logic clk = 0, rst_n = 0;
  buf_req_t req [NP];
  buf_rsp_t rsp [NP];
  logic [31:0] conflicts;
  int checks = 0, failures = 0;

  always #1 clk = ~clk;

  asv_global_buffer #(.NPORTS(NP), .BANKS(NB), .BANK_WORDS(BWORDS)) dut (
    .clk, .rst_n, .req, .rsp, .conflict_cycles(conflicts));

  initial begin
    #400000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  data_t  refm [NB*BWORDS];
  logic   pend [NP];
  data_t  pend_val [NP];
  longint exp_conf = 0;
  int     parallel = 0;

  initial begin
    for (int p = 0; p < NP; p++) begin req[p] = '0; pend[p] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    // fill memory through port 0
    for (int a = 0; a < NB*BWORDS; a++) begin
      req[0] = '{req: 1'b1, we: 1'b1, addr: baddr_t'(a), wdata: data_t'($urandom)};
      refm[a] = req[0].wdata;
      @(negedge clk);
    end
    req[0] = '0;
    @(negedge clk);
    exp_conf = conflicts;
    for (int t = 0; t < 3000; t++) begin
      int bank [NP];
      logic won [NP];
      for (int p = 0; p < NP; p++) begin
        // bias towards few banks to create conflicts
        int a;
        a = $urandom_range(0, 1) ? $urandom_range(0, BWORDS - 1) : $urandom_range(0, NB*BWORDS - 1);
        req[p].req   = ($urandom_range(0, 3) != 0);
        req[p].we    = ($urandom_range(0, 2) == 0);
        req[p].addr  = baddr_t'(a);
        req[p].wdata = data_t'($urandom);
        bank[p] = a / BWORDS;
      end
      #0.1;
      // expected grants: a port wins unless a lower port requests the same bank
      for (int p = 0; p < NP; p++) begin
        won[p] = req[p].req;
        for (int q = 0; q < p; q++) if (req[q].req && bank[q] == bank[p]) won[p] = 0;
        chk($sformatf("gnt port %0d", p), rsp[p].gnt, won[p]);
        if (req[p].req && !won[p]) exp_conf++;
      end
      if (won[0] && won[1] && won[2]) parallel++;
      @(posedge clk);
      #0.1;
      for (int p = 0; p < NP; p++) begin
        if (pend[p]) begin
          // read data from the previous cycle's grant is due in this cycle
        end
      end
      for (int p = 0; p < NP; p++) begin
        pend[p] = won[p] && !req[p].we;
        if (pend[p]) pend_val[p] = refm[req[p].addr];
        if (won[p] && req[p].we) refm[req[p].addr] = req[p].wdata;
      end
      for (int p = 0; p < NP; p++) begin
        chk("rvalid", rsp[p].rvalid, pend[p]);
        if (pend[p]) chk($sformatf("rdata port %0d", p), rsp[p].rdata, pend_val[p]);
      end
      @(negedge clk);
    end
    chk("conflict counter", conflicts, exp_conf);
    checks++;
    if (parallel == 0) begin failures++; $display("FAIL no cycle served three banks at once"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
