// apm: auxiliary processing module of the V unit (exponentials).
//
// For one tile of 16 key positions and all 8 rows it computes, in parallel
// (128 exponential units), the un-normalised softmax weights
//   p[i][v] = exp(s[i][v] - m[i])       for retained keys, else 0
// and per row the rescale factor corr[i] = exp(m_old[i] - m[i]) that brings
// earlier tiles' sums and outputs to the new maximum (online softmax).
// The published APM is a 128-input FP16 unit; this design uses the
// fixed-point base-2 approximation exp2q() of pade_pkg instead: scores are
// scaled by exp_scale/4096 into 1/16 steps of log2, the weights are 8-bit
// UQ0.8 (255 ~ 1.0, saturated) so they feed the INT8 systolic array, and corr
// is UQ1.8 (256 = 1.0).
//
// Timing: inputs sampled when en is high, outputs registered (latency 1).
module apm
  import pade_pkg::*;
#(
  parameter int unsigned NR = ROWS,
  parameter int unsigned NC = LANES
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic [15:0] exp_scale,
  input  logic        s_valid [NR][NC],
  input  score_t      s       [NR][NC],
  input  score_t      m_new   [NR],
  input  score_t      m_old   [NR],
  input  logic        have_old[NR],
  output logic [7:0]  p       [NR][NC],
  output logic [8:0]  corr    [NR]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NR; i++) begin
        corr[i] <= '0;
        for (int v = 0; v < NC; v++) p[i][v] <= '0;
      end
    end else if (en) begin
      for (int i = 0; i < NR; i++) begin
        corr[i] <= have_old[i] ? exp2q(m_new[i] - m_old[i], exp_scale) : 9'd0;
        for (int v = 0; v < NC; v++) begin
          logic [8:0] e;
          e = exp2q(m_new[i] - s[i][v], exp_scale);
          p[i][v] <= !s_valid[i][v] ? 8'd0 : (e[8] ? 8'd255 : e[7:0]);
        end
      end
    end
  end

endmodule
