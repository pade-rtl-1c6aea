// tb_qsum_generator: checks the eight sub-group sums of random and extreme
// queries against sums computed here, and the one-cycle latency.
module tb_qsum_generator;
  import pade_pkg::*;
  logic clk = 0, rst_n = 0, en = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  q_t q [DIM];
  logic signed [QSUM_W-1:0] qsum [NGROUP];

  qsum_generator dut (.*);

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      int ref_s [NGROUP];
      @(negedge clk);
      for (int j = 0; j < DIM; j++) q[j] = (n == 0) ? -8'sd128 : (n == 1) ? 8'sd127 : q_t'($urandom);
      for (int g = 0; g < NGROUP; g++) begin
        ref_s[g] = 0;
        for (int b = 0; b < GROUP; b++) ref_s[g] += int'(q[g*GROUP+b]);
      end
      en = 1;
      @(posedge clk); #1 en = 0;
      for (int g = 0; g < NGROUP; g++) begin
        checks++;
        if (int'(qsum[g]) != ref_s[g]) begin failures++; $display("FAIL n=%0d g=%0d %0d != %0d", n, g, qsum[g], ref_s[g]); end
      end
      // holds its value while en is low
      for (int j = 0; j < DIM; j++) q[j] = 8'sd1;
      @(posedge clk); #1;
      checks++;
      if (int'(qsum[0]) != ref_s[0]) begin failures++; $display("FAIL hold"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
