// tb_systolic_array: random products C = A x B (A unsigned 8-bit 8 x K,
// B signed 8-bit K x 16, K from 1 to 40, with idle gaps between input
// columns) against a reference computed here. Checks that acc equals C
// exactly NR+NC+1 cycles after the last input, that it then stays constant,
// and that clear zeroes it.
module tb_systolic_array;
  localparam int NR = 8, NC = 16, ACC_W = 24, LAT = NR + NC + 1;
  logic clk = 0, rst_n = 0, clear = 0, in_valid = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [7:0] a_in [NR];
  logic signed [7:0] b_in [NC];
  logic signed [ACC_W-1:0] acc [NR][NC];

  systolic_array #(.NR(NR), .NC(NC), .ACC_W(ACC_W)) dut (.*);

  int cref [NR][NC];

  task automatic compare(input string what, input int t);
    int bad;
    bad = 0;
    for (int i = 0; i < NR; i++) for (int j = 0; j < NC; j++) if (int'(acc[i][j]) != cref[i][j]) bad++;
    checks++;
    if (bad != 0) begin failures++; $display("FAIL %s test %0d: %0d wrong", what, t, bad); end
  endtask

  initial begin
    for (int i = 0; i < NR; i++) a_in[i] = 0;
    for (int j = 0; j < NC; j++) b_in[j] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int k;
      k = 1 + int'($urandom % 40);
      @(negedge clk); clear = 1;
      @(negedge clk); clear = 0;
      for (int i = 0; i < NR; i++) for (int j = 0; j < NC; j++) cref[i][j] = 0;
      for (int s = 0; s < k; s++) begin
        if ($urandom % 4 == 0) begin
          in_valid = 0;
          for (int i = 0; i < NR; i++) a_in[i] = 8'($urandom);   // ignored
          @(negedge clk);
        end
        in_valid = 1;
        for (int i = 0; i < NR; i++) a_in[i] = (t == 0) ? 8'd255 : 8'($urandom);
        for (int j = 0; j < NC; j++) b_in[j] = (t == 0) ? -8'sd128 : 8'($urandom);
        for (int i = 0; i < NR; i++) for (int j = 0; j < NC; j++) cref[i][j] += int'(a_in[i]) * int'(b_in[j]);
        @(negedge clk);
      end
      in_valid = 0;
      for (int i = 0; i < NR; i++) a_in[i] = 8'($urandom);
      // last input sampled at the previous edge; wait LAT-1 more edges
      repeat (LAT - 1) @(posedge clk);
      #1 compare("latency", t);
      repeat (5) @(posedge clk);
      #1 compare("hold", t);
    end
    @(negedge clk); clear = 1;
    @(negedge clk); clear = 0;
    for (int i = 0; i < NR; i++) for (int j = 0; j < NC; j++) cref[i][j] = 0;
    repeat (LAT) @(posedge clk);
    #1 compare("clear", 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
