// tb_asv_systolic_array: feeds skewed random matrices into a small array in
// both modes and checks every accumulator after exactly K+ROWS+COLS-2 cycles
// (and that one cycle fewer is not enough), then drains row by row.
module tb_asv_systolic_array;
  import asv_pkg::*;

  localparam int R = 5, C = 4, K = 7;

  logic clk = 0, rst_n = 0;
  pe_mode_e mode;
  logic en, clear, drain;
  data_t a_west [R];
  data_t b_north [C];
  acc_t south [C];
  int checks = 0, failures = 0;

  always #1 clk = ~clk;

  asv_systolic_array #(.ROWS(R), .COLS(C)) dut (
    .clk, .rst_n, .mode, .en, .clear, .drain, .a_west, .b_north, .south_acc(south));

  initial begin
    #100000;
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

  data_t A [R][K];
  data_t B [K][C];
  longint ref_c [R][C];

  task automatic run(input int m, input int cycles);
    mode = m ? PE_SAD : PE_MAC;
    for (int i = 0; i < R; i++) for (int k = 0; k < K; k++) A[i][k] = data_t'($signed($urandom_range(0, 2000)) - 1000);
    for (int k = 0; k < K; k++) for (int j = 0; j < C; j++) B[k][j] = data_t'($signed($urandom_range(0, 2000)) - 1000);
    for (int i = 0; i < R; i++) for (int j = 0; j < C; j++) begin
      ref_c[i][j] = 0;
      for (int k = 0; k < K; k++)
        ref_c[i][j] += m ? ((A[i][k] > B[k][j]) ? longint'(A[i][k]) - B[k][j] : longint'(B[k][j]) - A[i][k])
                         : longint'(A[i][k]) * B[k][j];
    end
    clear = 1;
    @(negedge clk);
    clear = 0;
    en = 1;
    for (int t = 0; t < cycles; t++) begin
      for (int i = 0; i < R; i++) a_west[i]  = (t - i >= 0 && t - i < K) ? A[i][t-i] : '0;
      for (int j = 0; j < C; j++) b_north[j] = (t - j >= 0 && t - j < K) ? B[t-j][j] : '0;
      @(negedge clk);
    end
    en = 0;
    for (int i = 0; i < R; i++) a_west[i] = '0;
    for (int j = 0; j < C; j++) b_north[j] = '0;
  endtask

  initial begin
    mode = PE_MAC; en = 0; clear = 0; drain = 0;
    for (int i = 0; i < R; i++) a_west[i] = '0;
    for (int j = 0; j < C; j++) b_north[j] = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int m = 0; m < 2; m++) begin
      // one cycle short: the last PE must still miss its last term
      run(m, K + R + C - 3);
      checks++;
      if (south[C-1] == acc_t'(ref_c[R-1][C-1])) begin
        failures++;
        $display("FAIL result complete before K+R+C-2 cycles");
      end
      run(m, K + R + C - 2);
      for (int r = R - 1; r >= 0; r--) begin
        for (int j = 0; j < C; j++)
          chk($sformatf("mode %0d C[%0d][%0d]", m, r, j), south[j], longint'(acc_t'(ref_c[r][j])));
        drain = 1;
        @(negedge clk);
        drain = 0;
      end
      for (int j = 0; j < C; j++) chk("drained to zero", south[j], 0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
