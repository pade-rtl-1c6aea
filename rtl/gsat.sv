// gsat: grouped lightweight sparsity ANDer tree of one PE lane.
//
// Computes the partial dot product dot = sum_j q_j * k_j^r of a 64-element
// signed 8-bit query with one key bit plane, using the selection produced by
// bs_scheduler instead of 64 AND gates. The 64 elements are split into 8
// sub-groups of 8. Slot t of sub-group g is a 5:1 multiplexer over
// {q[8g+t] .. q[8g+t+4]} steered by id; its output is AND-gated by v and the
// four slot outputs are added. In 0-mode (the scheduler flipped the bits) the
// sum of the selected elements is subtracted from the sub-group's query sum,
// i.e. sum over bits equal to 1 = qsum - sum over bits equal to 0. The eight
// sub-group results are added into the lane's dot product.
// The structure (8 sub-groups, four 5:1 muxes, adder, subtractor against the
// Q_sum) is the published one; the tree is purely combinational here.
//
// Interface: q (64 x int8), qsum (8 sub-group sums), sel (bs_sel_t);
// dot is a signed DOT_W-bit result in the same cycle.
module gsat
  import pade_pkg::*;
(
  input  q_t                              q    [DIM],
  input  logic signed [QSUM_W-1:0]        qsum [NGROUP],
  input  bs_sel_t                         sel,
  output logic signed [DOT_W-1:0]         dot
);

  logic signed [QSUM_W-1:0] grp [NGROUP];

  always_comb begin
    dot = '0;
    for (int g = 0; g < NGROUP; g++) begin
      logic signed [QSUM_W-1:0] s;
      s = '0;
      for (int t = 0; t < SLOTS; t++) begin
        int unsigned slot;
        q_t          m;
        slot = g*SLOTS + t;
        m    = q[g*GROUP + t + ((sel.id[slot] > 3'd4) ? 4 : 32'(sel.id[slot]))]; // 5:1 mux
        if (sel.v[slot]) s += QSUM_W'(m);            // AND gate + adder
      end
      grp[g] = sel.mode[g] ? (qsum[g] - s) : s;
      dot += DOT_W'(grp[g]);
    end
  end

endmodule
