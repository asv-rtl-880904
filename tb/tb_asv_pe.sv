// tb_asv_pe: drives one PE with random operands in both modes and checks the
// accumulator against a running reference sum, the one-cycle operand
// forwarding, clear, and the drain path.
module tb_asv_pe;
  import asv_pkg::*;

  logic clk = 0, rst_n = 0;
  pe_mode_e mode;
  logic en, clear, drain;
  data_t a_in, b_in, a_out, b_out;
  acc_t acc_in, acc_out;
  int checks = 0, failures = 0;

  always #1 clk = ~clk;

  asv_pe dut (.*);

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

  initial begin
    longint ref_acc;
    data_t pa, pb;
    mode = PE_MAC; en = 0; clear = 0; drain = 0; a_in = 0; b_in = 0; acc_in = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int m = 0; m < 2; m++) begin
      mode = m ? PE_SAD : PE_MAC;
      clear = 1;
      @(negedge clk);
      clear = 0;
      chk("clear", acc_out, 0);
      ref_acc = 0;
      for (int t = 0; t < 100; t++) begin
        pa = data_t'($urandom);
        pb = data_t'($urandom);
        a_in = pa; b_in = pb; en = ($urandom_range(0, 3) != 0);
        if (en) begin
          if (m == 0) ref_acc += longint'(pa) * longint'(pb);
          else        ref_acc += (pa > pb) ? longint'(pa) - pb : longint'(pb) - pa;
        end
        @(negedge clk);
        chk("a forwarded", a_out, pa);
        chk("b forwarded", b_out, pb);
        chk(m ? "sad acc" : "mac acc", acc_out, longint'(acc_t'(ref_acc)));
      end
    end
    en = 0;
    acc_in = 32'sd123456;
    drain = 1;
    clear = 1;
    @(negedge clk);
    drain = 0; clear = 0;
    chk("drain", acc_out, 123456);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
