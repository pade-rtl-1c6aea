// tb_bui_generator: checks the BUI table of a query.
// First the published worked example: Q = (6, -5, 9, -4) (rest 0) with only
// the sign plane known gives I_min = -9 * 127 and I_max = 15 * 127 in integer
// key units (the example prints the same interval in a fractional key
// format). Then random queries: for every r the interval
// must equal the brute-force extreme of sum_j q_j * u_j over the unknown low
// bits u_j in [0, 2^(7-r)-1], found here element by element.
module tb_bui_generator;
  import pade_pkg::*;
  logic clk = 0, rst_n = 0, en = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  q_t q [DIM];
  score_t imin [KBITS], imax [KBITS];

  bui_generator dut (.*);

  task automatic load_and_check();
    @(negedge clk); en = 1;
    @(posedge clk); #1 en = 0;
    for (int r = 0; r < KBITS; r++) begin
      longint lo, hi, umax;
      umax = (longint'(1) << (7 - r)) - 1;
      lo = 0; hi = 0;
      for (int j = 0; j < DIM; j++) begin
        // extreme of q*u over u in [0, umax]
        longint a, b;
        a = 0; b = longint'(q[j]) * umax;
        lo += (a < b) ? a : b;
        hi += (a > b) ? a : b;
      end
      checks += 2;
      if (longint'(imin[r]) != lo) begin failures++; $display("FAIL imin r=%0d %0d != %0d", r, imin[r], lo); end
      if (longint'(imax[r]) != hi) begin failures++; $display("FAIL imax r=%0d %0d != %0d", r, imax[r], hi); end
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int j = 0; j < DIM; j++) q[j] = 0;
    q[0] = 6; q[1] = -5; q[2] = 9; q[3] = -4;
    load_and_check();
    checks += 3;
    if (imin[0] != -9 * 127) begin failures++; $display("FAIL example min"); end
    if (imax[0] != 15 * 127) begin failures++; $display("FAIL example max"); end
    if (imax[1] != 15 * 63 || imin[1] != -9 * 63) begin failures++; $display("FAIL example r=1"); end
    for (int n = 0; n < 100; n++) begin
      for (int j = 0; j < DIM; j++) q[j] = (n == 0) ? 8'sd127 : (n == 1) ? -8'sd128 : q_t'($urandom);
      load_and_check();
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
