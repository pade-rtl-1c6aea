// scoreboard: partial-score cache of one bit-wise PE lane.
//
// Holds the partial scores S^r of keys whose processing is in flight, so that
// when the next bit plane of a key arrives (possibly after other keys'
// planes, out of order) its score is continued instead of recomputed. Each
// of the ENTRIES entries is {valid, token index, bit index, partial score}
// (1 + 9 + 3 + 32 = 45 bits with the default sizes).
// Lookup is fully associative on the token index and combinational: hit,
// the stored score and the stored bit index are returned in the same cycle.
// One write operation per cycle: wr_en with evict = 0 updates the entry of
// wr_tok (or allocates the lowest free entry if there is none); wr_en with
// evict = 1 frees the entry of wr_tok. Writes take effect at the clock edge.
// Entry contents follow the published table; the associative match and the
// lowest-free allocation are this design's choices. The caller must not
// allocate when full is high (an assertion checks this).
module scoreboard
  import pade_pkg::*;
#(
  parameter int unsigned ENTRIES = SB_ENTRIES
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  // lookup
  input  logic [TOK_W-1:0] lk_tok,
  output logic             lk_hit,
  output score_t           lk_psum,
  output logic [2:0]       lk_bit,
  // update / evict
  input  logic             wr_en,
  input  logic             wr_evict,
  input  logic [TOK_W-1:0] wr_tok,
  input  logic [2:0]       wr_bit,
  input  score_t           wr_psum,
  output logic             full,
  output logic [$clog2(ENTRIES+1)-1:0] used
);

  typedef struct packed {
    logic             v;
    logic [TOK_W-1:0] tok;
    logic [2:0]       bidx;
    score_t           psum;
  } entry_t;

  entry_t tab_q [ENTRIES];

  // lookup
  always_comb begin
    lk_hit  = 1'b0;
    lk_psum = '0;
    lk_bit  = '0;
    for (int e = 0; e < ENTRIES; e++) begin
      if (tab_q[e].v && tab_q[e].tok == lk_tok) begin
        lk_hit  = 1'b1;
        lk_psum = tab_q[e].psum;
        lk_bit  = tab_q[e].bidx;
      end
    end
  end

  // write-side match and free slot
  logic                        w_hit, any_free;
  logic [$clog2(ENTRIES)-1:0]  w_idx, f_idx;
  always_comb begin
    w_hit = 1'b0; w_idx = '0; any_free = 1'b0; f_idx = '0;
    used  = '0;
    for (int e = ENTRIES-1; e >= 0; e--) begin
      if (tab_q[e].v && tab_q[e].tok == wr_tok) begin
        w_hit = 1'b1;
        w_idx = $clog2(ENTRIES)'(e);
      end
      if (!tab_q[e].v) begin
        any_free = 1'b1;
        f_idx    = $clog2(ENTRIES)'(e);
      end
      used += (tab_q[e].v ? 1 : 0);
    end
  end
  assign full = !any_free;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int e = 0; e < ENTRIES; e++) tab_q[e] <= '0;
    end else if (clear) begin
      for (int e = 0; e < ENTRIES; e++) tab_q[e].v <= 1'b0;
    end else if (wr_en) begin
      if (wr_evict) begin
        if (w_hit) tab_q[w_idx].v <= 1'b0;
      end else if (w_hit) begin
        tab_q[w_idx].bidx <= wr_bit;
        tab_q[w_idx].psum <= wr_psum;
      end else if (any_free) begin
        tab_q[f_idx] <= '{v: 1'b1, tok: wr_tok, bidx: wr_bit, psum: wr_psum};
      end
    end
  end

  always_ff @(posedge clk) begin
    if (rst_n && wr_en && !wr_evict && !w_hit)
      assert (any_free) else $error("scoreboard: allocation while full");
  end

endmodule
