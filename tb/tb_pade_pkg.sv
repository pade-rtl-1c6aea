// tb_pade_pkg: checks the shared constants and the fixed-point exponential
// exp2q() of the package: exact table values at the grid points, the 1/16
// log2 step interpretation of exp_scale, the cut-off to 0 beyond 2^-8, and a
// bound on the error against the real 2^-x over random inputs.
module tb_pade_pkg;
  import pade_pkg::*;
  int checks = 0, failures = 0;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    chk(DIM == 64 && KBITS == 8 && ROWS == 8 && LANES == 16, "sizes");
    chk(GROUP * NGROUP == DIM && SLOTS == 4 && NSEL == NGROUP * SLOTS, "groups");
    chk(SB_ENTRIES == 32 && 1 + TOK_W + 3 + PSUM_W == 45, "scoreboard entry 45 bits");
    // exp_scale = 4096: d is directly in 1/16 log2 units
    chk(exp2q(0, 16'd4096) == 9'd256, "exp2(0)=1");
    chk(exp2q(16, 16'd4096) == 9'd128, "exp2(-1)=1/2");
    chk(exp2q(32, 16'd4096) == 9'd64, "exp2(-2)=1/4");
    chk(exp2q(8, 16'd4096) == 9'd181, "exp2(-0.5)");
    chk(exp2q(8*16, 16'd4096) == 9'd1, "exp2(-8)");
    chk(exp2q(9*16, 16'd4096) == 9'd0, "cut off");
    chk(exp2q(32'hFFFF_0000, 16'd4096) == 9'd0, "large d");
    chk(exp2q(1, 16'd65535) == 9'd134, "scale: 65535/4096 -> 15/16 step");
    for (int n = 0; n < 2000; n++) begin
      int unsigned d, sc;
      real x, e;
      int  got;
      d  = $urandom % 20000;
      sc = 1 + $urandom % 8000;
      got = int'(exp2q(d, 16'(sc)));
      x = real'((longint'(d) * sc) >> 12) / 16.0;     // truncated like the RTL
      e = 256.0 * (2.0 ** (-x));
      checks++;
      if (x > 8.5) begin
        if (got != 0) begin failures++; $display("FAIL tail d=%0d sc=%0d got %0d", d, sc, got); end
      end else if ((real'(got) - e) > 1.0 || (e - real'(got)) > 1.0 + e * 0.02) begin
        failures++; $display("FAIL d=%0d sc=%0d got %0d want %f", d, sc, got, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
