// bui_gf_module: BUI-enabled guarded filtering (BUI-GF) of one PE row.
//
// Maintains the pruning threshold of one query. Every partial score S that a
// lane of the row produces is turned into its guaranteed lower bound
// LB = S + I_min[r] (r = bit planes known so far). The module keeps the
// running maximum of all lower bounds of the row, whatever bit plane they
// came from, and derives T = max(LB) - alpha * radius, which is broadcast to
// the row's 16 lanes. A key whose upper bound cannot exceed T cannot matter
// to softmax (its weight is below e^-(alpha*radius) of the maximum's).
// The threshold rule, the lower bounds and the running max follow the
// published module. alpha is an unsigned fraction alpha_q/256 (0 .. 256) and
// radius is given in raw score units; the published default radius is 5 in
// softmax-input units, so the caller scales it. The max is cleared by clear
// (start of a query pass) and kept across key windows, since a maximum taken
// over a subset of keys is a safe (lower) estimate of the full row's.
//
// Timing: lower bounds presented in cycle n are in the maximum at edge n and
// in thr from cycle n+1. Before any score arrives thr is the most negative
// value, so nothing is pruned.
module bui_gf_module
  import pade_pkg::*;
#(
  parameter int unsigned NLANE = LANES
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        clear,
  input  logic [8:0]  alpha_q,
  input  score_t      radius,
  input  score_t      imin [KBITS],
  input  logic        s_valid [NLANE],
  input  score_t      s_score [NLANE],
  input  logic [2:0]  s_plane [NLANE],
  output score_t      thr,
  output score_t      max_lb,
  output logic        have_max
);

  score_t max_q;
  logic   have_q;

  // max over this cycle's lower bounds and the stored max
  score_t cand;
  logic   cand_v;
  score_t lb [NLANE];
  always_comb begin
    cand   = max_q;
    cand_v = have_q;
    for (int l = 0; l < NLANE; l++) begin
      lb[l] = s_score[l] + imin[s_plane[l]];
      if (s_valid[l]) begin
        if (!cand_v || lb[l] > cand) cand = lb[l];
        cand_v = 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      max_q  <= '0;
      have_q <= 1'b0;
    end else if (clear) begin
      max_q  <= '0;
      have_q <= 1'b0;
    end else begin
      max_q  <= cand;
      have_q <= cand_v;
    end
  end

  // threshold updating: T = max - alpha * radius
  logic signed [47:0] margin;
  assign margin   = (48'(radius) * $signed({39'd0, alpha_q})) >>> 8;
  assign thr      = have_q ? (max_q - score_t'(margin)) : {1'b1, {(PSUM_W-1){1'b0}}};
  assign max_lb   = max_q;
  assign have_max = have_q;

endmodule
