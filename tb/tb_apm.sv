// tb_apm: random tiles of scores with random validity, maxima and scales.
// Checks one cycle after en: p[i][v] = 0 for invalid keys, otherwise
// exp2q(m_new - s) saturated to 255 (the package exponential, itself checked
// against 2^-x in tb_pade_pkg), and corr[i] = exp2q(m_new - m_old) or 0 when
// the row had no earlier maximum; also that a key at the maximum gets the
// full weight 255, a key far below gets 0, and outputs hold while en is low.
module tb_apm;
  import pade_pkg::*;
  localparam int NR = ROWS, NC = LANES;
  logic clk = 0, rst_n = 0, en = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [15:0] exp_scale;
  logic        s_valid [NR][NC];
  score_t      s [NR][NC];
  score_t      m_new [NR], m_old [NR];
  logic        have_old [NR];
  logic [7:0]  p [NR][NC];
  logic [8:0]  corr [NR];

  apm #(.NR(NR), .NC(NC)) dut (.*);

  logic [7:0] ep [NR][NC];
  logic [8:0] ec [NR];

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 500; t++) begin
      @(negedge clk);
      exp_scale = 16'(1 + $urandom % 2000);
      for (int i = 0; i < NR; i++) begin
        m_new[i] = score_t'($signed($urandom) >>> 16);
        m_old[i] = m_new[i] - score_t'($urandom % 3000);
        have_old[i] = ($urandom % 4 != 0);
        ec[i] = have_old[i] ? exp2q(m_new[i] - m_old[i], exp_scale) : 9'd0;
        for (int v = 0; v < NC; v++) begin
          logic [8:0] e;
          s_valid[i][v] = ($urandom % 3 != 0);
          case (v)
            0: s[i][v] = m_new[i];
            1: s[i][v] = m_new[i] - 32'sd2000000;
            default: s[i][v] = m_new[i] - score_t'($urandom % 4000);
          endcase
          e = exp2q(m_new[i] - s[i][v], exp_scale);
          ep[i][v] = !s_valid[i][v] ? 8'd0 : (e > 9'd255 ? 8'd255 : e[7:0]);
          if (v == 0 && s_valid[i][v] && ep[i][v] != 8'd255) begin failures++; $display("FAIL ref max"); end
          if (v == 1 && ep[i][v] != 8'd0) begin failures++; $display("FAIL ref tail"); end
        end
      end
      en = 1;
      @(negedge clk);
      en = 0;
      for (int i = 0; i < NR; i++) begin
        checks++;
        if (corr[i] != ec[i]) begin failures++; $display("FAIL corr t=%0d i=%0d %0d vs %0d", t, i, corr[i], ec[i]); end
        for (int v = 0; v < NC; v++) begin
          checks++;
          if (p[i][v] != ep[i][v]) begin failures++; $display("FAIL p t=%0d %0d,%0d: %0d vs %0d", t, i, v, p[i][v], ep[i][v]); end
        end
      end
      for (int i = 0; i < NR; i++) m_new[i] = m_new[i] + 100;
      @(negedge clk);
      checks++;
      if (p[0][0] != ep[0][0] || corr[0] != ec[0]) begin failures++; $display("FAIL hold"); end
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
