// tb_bui_gf_module: drives random partial scores from the 16 lanes with
// random bit-plane indices and checks, against a running maximum kept here,
// that (a) before any score thr is the most negative value, (b) one cycle
// after a set of scores the threshold equals max(S + I_min[r]) - alpha*radius
// (radius*alpha_q >>> 8), taken over every score since the last clear, and
// (c) clear restarts the maximum.
module tb_bui_gf_module;
  import pade_pkg::*;
  localparam int NLANE = LANES;
  logic clk = 0, rst_n = 0, clear = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [8:0] alpha_q;
  score_t radius, thr, max_lb;
  score_t imin [KBITS];
  logic   s_valid [NLANE];
  score_t s_score [NLANE];
  logic [2:0] s_plane [NLANE];
  logic have_max;

  bui_gf_module #(.NLANE(NLANE)) dut (.*);

  longint mref;
  bit     have;

  initial begin
    alpha_q = 9'd128; radius = 1000;
    for (int r = 0; r < KBITS; r++) imin[r] = -score_t'(($urandom % 2000) * ((1 << (7 - r)) - 1));
    for (int l = 0; l < NLANE; l++) begin s_valid[l] = 0; s_score[l] = 0; s_plane[l] = 0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    checks++;
    if (thr != {1'b1, {(PSUM_W-1){1'b0}}}) begin failures++; $display("FAIL initial thr"); end
    have = 0; mref = 0;
    for (int n = 0; n < 3000; n++) begin
      @(negedge clk);
      if (n % 400 == 0) alpha_q = 9'($urandom % 257);
      if (n % 700 == 0) radius = score_t'($urandom % 100000);
      clear = (n % 1000 == 999);
      for (int l = 0; l < NLANE; l++) begin
        s_valid[l] = ($urandom % 4 == 0);
        s_score[l] = score_t'($signed($urandom) >>> 12);
        s_plane[l] = 3'($urandom);
      end
      @(posedge clk); #1;
      if (clear) begin have = 0; mref = 0; end
      else begin
        for (int l = 0; l < NLANE; l++) if (s_valid[l]) begin
          longint lb;
          lb = longint'(s_score[l]) + longint'(imin[s_plane[l]]);
          if (!have || lb > mref) mref = lb;
          have = 1;
        end
      end
      checks += 2;
      if (have_max != have) begin failures++; $display("FAIL have n=%0d", n); end
      if (have) begin
        longint exp_t;
        exp_t = mref - ((longint'(radius) * longint'(alpha_q)) >>> 8);
        if (longint'(thr) != exp_t) begin failures++; $display("FAIL thr n=%0d %0d vs %0d", n, thr, exp_t); end
      end else if (thr != {1'b1, {(PSUM_W-1){1'b0}}}) begin
        failures++; $display("FAIL thr after clear");
      end
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
