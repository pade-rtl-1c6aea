// tb_gsat: self-checking test of the grouped sparsity ANDer tree.
// Random signed queries and random key planes are scheduled by bs_scheduler
// and evaluated by gsat; the result must equal the plain dot product
// sum_j q_j * bit_j computed here, for 1-mode and 0-mode sub-groups alike.
module tb_gsat;
  import pade_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  q_t q [DIM];
  logic signed [QSUM_W-1:0] qsum [NGROUP];
  logic in_valid = 0, in_ready, out_valid;
  plane_rsp_t in_rsp, out_rsp;
  bs_sel_t sel;
  logic signed [DOT_W-1:0] dot;

  bs_scheduler u_bs (.clk, .rst_n, .in_valid, .in_ready, .in_rsp, .out_valid, .out_ready(1'b1), .out_rsp, .out_sel(sel));
  gsat dut (.q, .qsum, .sel, .dot);

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      logic [63:0] bits;
      int ref_dot;
      for (int j = 0; j < DIM; j++) q[j] = (n < 10) ? ((j % 2) ? 8'sd127 : -8'sd128) : q_t'($urandom);
      for (int g = 0; g < NGROUP; g++) begin
        int s;
        s = 0;
        for (int b = 0; b < GROUP; b++) s += int'(q[g*GROUP+b]);
        qsum[g] = QSUM_W'(s);
      end
      bits = (n % 7 == 0) ? 64'hFFFF_FFFF_FFFF_FFFF : {$urandom, $urandom};
      ref_dot = 0;
      for (int j = 0; j < DIM; j++) if (bits[j]) ref_dot += int'(q[j]);
      @(negedge clk);
      in_rsp = '{tok: 0, plane: 0, bits: bits};
      in_valid = 1;
      @(posedge clk);
      #1 in_valid = 0;
      while (!out_valid) @(posedge clk);
      #1;
      checks++;
      if (int'(dot) != ref_dot) begin
        failures++;
        $display("FAIL n=%0d dot=%0d ref=%0d", n, dot, ref_dot);
      end
      @(posedge clk);
    end
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
