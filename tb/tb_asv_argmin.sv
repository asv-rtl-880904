// tb_asv_argmin: streams random groups of costs (with ties) through the
// comparator and checks the best index and cost of each group.
module tb_asv_argmin;
  import asv_pkg::*;

  logic clk = 0, rst_n = 0;
  logic in_valid, in_first, in_last, out_valid;
  data_t in_cost, out_cost;
  logic [7:0] out_idx;
  int checks = 0, failures = 0;

  always #1 clk = ~clk;
  asv_argmin dut (.*);

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    data_t c [64];
    int n, best;
    in_valid = 0; in_first = 0; in_last = 0; in_cost = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int g = 0; g < 100; g++) begin
      n = (g % 10 == 0) ? 1 : $urandom_range(2, 64);
      best = 0;
      for (int i = 0; i < n; i++) begin
        c[i] = data_t'($urandom_range(0, 40));   // small range: many ties
        if (c[i] < c[best]) best = i;
      end
      for (int i = 0; i < n; i++) begin
        in_valid = 1; in_first = (i == 0); in_last = (i == n - 1); in_cost = c[i];
        @(negedge clk);
        // idle gaps inside a group must not matter
        if (i < n - 1 && $urandom_range(0, 3) == 0) begin
          in_valid = 0;
          @(negedge clk);
        end
      end
      in_valid = 0; in_first = 0; in_last = 0;
      checks++;
      if (!out_valid || out_idx != 8'(best) || out_cost != c[best]) begin
        failures++;
        $display("FAIL group %0d: valid %0d idx %0d cost %0d, expected idx %0d cost %0d",
                 g, out_valid, out_idx, out_cost, best, c[best]);
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
