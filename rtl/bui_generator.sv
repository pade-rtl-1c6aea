// bui_generator: bit-level uncertainty interval (BUI) generator.
//
// Before a query is processed, builds its BUI lookup table: for every number
// of known key bit planes r+1 (r = 0 .. 7, r = 0 means only the MSB is known)
// the largest and smallest amount the still unknown planes can add to the
// dot product q . k. In two's complement every bit below the sign bit adds a
// non-negative amount, so the unknown bits of k contribute at most
// (2^(7-r) - 1) per element. The maximum is reached by setting them to 1
// where q > 0, the minimum by setting them to 1 where q < 0:
//   I_max[r] = Qpos * (2^(7-r) - 1),  Qpos = sum of positive q_j
//   I_min[r] = Qneg * (2^(7-r) - 1),  Qneg = sum of negative q_j
// (the multiply is a shift and a subtraction). With r = 7 both are 0.
// This closed form is derived from the published worked example (Q = 6, -5,
// 9, -4 with only the MSB known gives -69.75 / +116.25 in its fixed-point
// scale). The sign split stands for the figure's "bit inversion" stage; the
// exact gates are not given.
//
// Interface: when en is high, q is read and imin/imax are updated at the
// next clock edge (latency 1 cycle).
module bui_generator
  import pade_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  logic    en,
  input  q_t      q    [DIM],
  output score_t  imin [KBITS],
  output score_t  imax [KBITS]
);

  score_t qpos, qneg;
  always_comb begin
    qpos = '0;
    qneg = '0;
    for (int j = 0; j < DIM; j++) begin
      if (q[j] > 0) qpos += score_t'(q[j]);
      else          qneg += score_t'(q[j]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < KBITS; r++) begin
        imin[r] <= '0;
        imax[r] <= '0;
      end
    end else if (en) begin
      for (int r = 0; r < KBITS; r++) begin
        imax[r] <= (qpos <<< (KBITS-1-r)) - qpos;
        imin[r] <= (qneg <<< (KBITS-1-r)) - qneg;
      end
    end
  end

endmodule
