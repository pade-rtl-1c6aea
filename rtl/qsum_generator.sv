// qsum_generator: Q_sum generator of the QK unit.
//
// Adds each sub-group of 8 query elements: qsum[g] = sum_{j=8g}^{8g+7} q_j.
// The ANDer trees need these sums for sub-groups the scheduler flipped to
// 0-mode (sum over 1-bits = qsum - sum over 0-bits). One generator serves the
// whole QK unit; the controller presents the 8 queries one per cycle at the
// start of a pass and stores the results per row.
// The published design names the unit and its purpose; the adder tree with a
// registered output is this design's simplest form of it.
//
// Interface: when en is high, q is summed and qsum is updated at the next
// clock edge (latency 1 cycle, one query per cycle).
module qsum_generator
  import pade_pkg::*;
(
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      en,
  input  q_t                        q    [DIM],
  output logic signed [QSUM_W-1:0]  qsum [NGROUP]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int g = 0; g < NGROUP; g++) qsum[g] <= '0;
    end else if (en) begin
      for (int g = 0; g < NGROUP; g++) begin
        logic signed [QSUM_W-1:0] s;
        s = '0;
        for (int b = 0; b < GROUP; b++) s += QSUM_W'(q[g*GROUP + b]);
        qsum[g] <= s;
      end
    end
  end

endmodule
