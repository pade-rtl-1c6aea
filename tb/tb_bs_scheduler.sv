// tb_bs_scheduler: self-checking test of the bidirectional-sparsity scheduler.
// Feeds random and corner-case 64-bit key planes and checks, independently of
// the scheduler's algorithm, that (a) each sub-group is flipped exactly when
// it holds more than 4 ones, (b) the selected positions t+Id_t of the 4 time
// steps are exactly the set bits of the (possibly flipped) sub-group, each
// once, (c) the token/plane tag is passed through and (d) the result appears
// 4 cycles after the plane is accepted.
module tb_bs_scheduler;
  import pade_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  plane_rsp_t in_rsp, out_rsp;
  bs_sel_t out_sel;

  bs_scheduler dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run_plane(input logic [63:0] bits, input logic [8:0] tok, input logic [2:0] pl);
    int lat;
    @(negedge clk);
    in_rsp   = '{tok: tok, plane: pl, bits: bits};
    in_valid = 1;
    @(posedge clk);
    while (!in_ready) @(posedge clk);
    #1 in_valid = 0;
    lat = 0;
    while (!out_valid) begin @(posedge clk); #1 lat++; end
    check(lat == 4, $sformatf("latency %0d != 4", lat));
    check(out_rsp.tok == tok && out_rsp.plane == pl && out_rsp.bits == bits, "tag passthrough");
    for (int g = 0; g < 8; g++) begin
      logic [7:0] grp, pat, got;
      int ones;
      grp  = bits[g*8 +: 8];
      ones = $countones(grp);
      check(out_sel.mode[g] == (ones > 4), $sformatf("mode g%0d", g));
      pat = (ones > 4) ? ~grp : grp;
      got = '0;
      for (int t = 0; t < 4; t++) begin
        int pos;
        if (out_sel.v[g*4+t]) begin
          check(out_sel.id[g*4+t] <= 4, "id range");
          pos = t + int'(out_sel.id[g*4+t]);
          check(got[pos] == 0, "position chosen twice");
          got[pos] = 1;
        end
      end
      check(got == pat, $sformatf("group %0d selected %b expected %b", g, got, pat));
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_plane(64'h0, 1, 0);
    run_plane(64'hFFFF_FFFF_FFFF_FFFF, 2, 1);
    run_plane(64'hF0F0_0F0F_AAAA_5555, 3, 2);
    run_plane(64'hB6B6_1111_8080_E0E0, 4, 3);   // includes k = 0,1,1,0,1,1,0,1
    for (int n = 0; n < 300; n++) run_plane({$urandom, $urandom}, 9'($urandom), 3'($urandom));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
