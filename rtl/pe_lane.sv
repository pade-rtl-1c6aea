// pe_lane: scoreboard-based, result-reusable bit-wise PE lane.
//
// One lane scores the keys it owns in the current window (keys
// j = LANE_ID + LANES*k, k = 0 .. n_keys-1) against the row's query, one key
// bit plane at a time, MSB first, and drops a key as soon as its upper bound
// falls to or below the row threshold. Work is done out of order:
//   1. When a key is started only its MSB plane is requested.
//   2. Whenever any plane arrives it goes through the BS scheduler and the
//      grouped ANDer tree (gsat), giving dS = sum_j q_j * k_j^r. The MSB plane
//      has weight -2^7 (negated), plane r is shifted left by 7-r.
//   3. The scoreboard is looked up by token: on a hit the stored partial
//      score is continued (S = S_prev + dS), otherwise S = dS.
//   4. The decision unit tests S + I_max[r] > T. If it holds and r < 7, the
//      score is written back to the scoreboard and the next plane of the
//      same key is queued for request; at r = 7 the exact score is reported
//      as retained and the entry freed. If it fails the key is pruned, its
//      entry freed and no further plane of it is fetched.
//   5. Requests: queued next-plane requests go first; otherwise, if fewer than
//      ENTRIES keys are active, the MSB plane of the next new key. While a
//      key waits for its next plane the lane keeps processing other keys.
// Every computed S is also sent to the row's BUI-GF module (s_*), which
// raises the threshold. This is the published lane (GSAT, scoreboard,
// decision unit, out-of-order plane requests). The key-to-lane mapping, the
// MAX_OUT cap on requests in flight (which sizes the response FIFO) and the
// handshakes are this design's choices.
//
// Interface: start (one cycle) begins a window with n_keys keys; req_* is a
// valid/ready request port; rsp_* delivers the requested planes in any order
// (never more than MAX_OUT outstanding, so it has no ready); fin_* reports a
// retained key; ev_* are one-cycle event pulses for statistics; idle is high
// when the window is finished.
// Timing: a plane is scored in the cycle it leaves the BS scheduler (5 cycle
// scheduler period), and its next-plane request can be issued the cycle after.
module pe_lane
  import pade_pkg::*;
#(
  parameter int unsigned LANE_ID  = 0,
  parameter int unsigned ENTRIES  = SB_ENTRIES,
  parameter int unsigned MAX_OUT  = 4,
  parameter int unsigned KEYS_MAX = (1 << TOK_W) / LANES
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [$clog2(KEYS_MAX+1)-1:0] n_keys,
  input  q_t                        q    [DIM],
  input  logic signed [QSUM_W-1:0]  qsum [NGROUP],
  input  score_t                    imax [KBITS],
  input  score_t                    thr,
  // plane requests
  output logic                      req_valid,
  input  logic                      req_ready,
  output logic [TOK_W-1:0]          req_tok,
  output logic [2:0]                req_plane,
  // plane responses
  input  logic                      rsp_valid,
  input  plane_rsp_t                rsp,
  // scores to the BUI-GF module
  output logic                      s_valid,
  output score_t                    s_score,
  output logic [2:0]                s_plane,
  // retained keys
  output logic                      fin_valid,
  output logic [TOK_W-1:0]          fin_tok,
  output score_t                    fin_score,
  // statistics
  output logic                      ev_plane,
  output logic                      ev_hit,
  output logic                      ev_prune,
  output logic                      ev_ooe,
  output logic                      ev_sbfull,
  output logic                      idle
);

  localparam int unsigned KW = $clog2(KEYS_MAX+1);
  localparam int unsigned AW = $clog2(ENTRIES+1);
  localparam int unsigned OW = $clog2(MAX_OUT+1);
  localparam int unsigned CD = ENTRIES;          // continuation queue depth

  // ---------------- response FIFO ----------------
  plane_rsp_t rf_mem [MAX_OUT];
  logic [$clog2(MAX_OUT)-1:0] rf_wp, rf_rp;
  logic [OW-1:0] rf_cnt;
  logic rf_pop;

  // ---------------- BS scheduler ----------------
  logic       bs_in_ready, bs_out_valid;
  plane_rsp_t bs_rsp;
  bs_sel_t    bs_sel;

  assign rf_pop = (rf_cnt != 0) && bs_in_ready;

  bs_scheduler u_bs (
    .clk, .rst_n,
    .in_valid (rf_cnt != 0),
    .in_ready (bs_in_ready),
    .in_rsp   (rf_mem[rf_rp]),
    .out_valid(bs_out_valid),
    .out_ready(1'b1),
    .out_rsp  (bs_rsp),
    .out_sel  (bs_sel)
  );

  // ---------------- compute stage ----------------
  logic signed [DOT_W-1:0] dot;
  gsat u_gsat (.q(q), .qsum(qsum), .sel(bs_sel), .dot(dot));

  score_t contrib, score, ub;
  logic   sb_hit, keep, sb_full;
  score_t sb_psum;
  logic [2:0] sb_bit;
  logic [AW-1:0] sb_used;
  logic [2:0] r;

  assign r = bs_rsp.plane;
  always_comb begin
    score_t d;
    d       = score_t'(dot);
    contrib = ((r == 3'd0) ? -d : d) <<< (KBITS-1-32'(r));
    score   = sb_hit ? (sb_psum + contrib) : contrib;
  end

  decision_unit u_dec (.score(score), .imax(imax[r]), .thr(thr), .ub(ub), .keep(keep));

  logic proc, last, do_prune, do_final, do_cont;
  assign proc     = bs_out_valid;
  assign last     = (r == 3'(KBITS-1));
  assign do_prune = proc && !keep;
  assign do_final = proc && keep && last;
  assign do_cont  = proc && keep && !last;

  scoreboard #(.ENTRIES(ENTRIES)) u_sb (
    .clk, .rst_n,
    .clear   (start),
    .lk_tok  (bs_rsp.tok),
    .lk_hit  (sb_hit),
    .lk_psum (sb_psum),
    .lk_bit  (sb_bit),
    .wr_en   (proc),
    .wr_evict(!do_cont),
    .wr_tok  (bs_rsp.tok),
    .wr_bit  (r),
    .wr_psum (score),
    .full    (sb_full),
    .used    (sb_used)
  );

  // ---------------- continuation queue ----------------
  logic [TOK_W+2:0] cq_mem [CD];
  logic [$clog2(CD)-1:0] cq_wp, cq_rp;
  logic [$clog2(CD+1)-1:0] cq_cnt;

  // ---------------- request selection ----------------
  logic [KW-1:0] next_k, nkeys_q;
  logic [AW-1:0] active;
  logic [OW-1:0] outst;
  logic          running;
  logic          use_cont, use_new, req_fire;

  assign use_cont  = (cq_cnt != 0);
  assign use_new   = !use_cont && running && (next_k < nkeys_q) && (active < AW'(ENTRIES));
  assign req_valid = (use_cont || use_new) && (outst < OW'(MAX_OUT));
  assign req_tok   = use_cont ? cq_mem[cq_rp][TOK_W+2:3] : TOK_W'(LANE_ID + LANES * 32'(next_k));
  assign req_plane = use_cont ? cq_mem[cq_rp][2:0] : 3'd0;
  assign req_fire  = req_valid && req_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rf_wp <= '0; rf_rp <= '0; rf_cnt <= '0;
      cq_wp <= '0; cq_rp <= '0; cq_cnt <= '0;
      next_k <= '0; nkeys_q <= '0; active <= '0; outst <= '0; running <= 1'b0;
      for (int i = 0; i < MAX_OUT; i++) rf_mem[i] <= '0;
      for (int i = 0; i < CD; i++) cq_mem[i] <= '0;
    end else if (start) begin
      rf_wp <= '0; rf_rp <= '0; rf_cnt <= '0;
      cq_wp <= '0; cq_rp <= '0; cq_cnt <= '0;
      next_k <= '0; nkeys_q <= n_keys; active <= '0; outst <= '0; running <= 1'b1;
    end else begin
      // response FIFO
      if (rsp_valid) begin
        rf_mem[rf_wp] <= rsp;
        rf_wp <= (rf_wp == $clog2(MAX_OUT)'(MAX_OUT-1)) ? '0 : rf_wp + 1'b1;
      end
      if (rf_pop) rf_rp <= (rf_rp == $clog2(MAX_OUT)'(MAX_OUT-1)) ? '0 : rf_rp + 1'b1;
      rf_cnt <= rf_cnt + OW'(rsp_valid) - OW'(rf_pop);
      outst  <= outst + OW'(req_fire) - OW'(rf_pop);
      // continuation queue
      if (do_cont) begin
        cq_mem[cq_wp] <= {bs_rsp.tok, r + 3'd1};
        cq_wp <= (cq_wp == $clog2(CD)'(CD-1)) ? '0 : cq_wp + 1'b1;
      end
      if (req_fire && use_cont) cq_rp <= (cq_rp == $clog2(CD)'(CD-1)) ? '0 : cq_rp + 1'b1;
      cq_cnt <= cq_cnt + ($clog2(CD+1))'(do_cont) - ($clog2(CD+1))'(req_fire && use_cont);
      // new keys and active count
      if (req_fire && use_new) next_k <= next_k + 1'b1;
      active <= active + AW'(req_fire && use_new) - AW'(do_prune || do_final);
      if (running && next_k == nkeys_q && active == 0) running <= 1'b0;
    end
  end

  assign idle = !running;

  // ---------------- outputs ----------------
  assign s_valid   = proc;
  assign s_score   = score;
  assign s_plane   = r;
  assign fin_valid = do_final;
  assign fin_tok   = bs_rsp.tok;
  assign fin_score = score;
  assign ev_plane  = proc;
  assign ev_hit    = proc && sb_hit;
  assign ev_prune  = do_prune;
  assign ev_ooe    = proc && (active > AW'(1));
  assign ev_sbfull = running && !use_cont && (next_k < nkeys_q) && (active >= AW'(ENTRIES));

  // ---------------- checks ----------------
  always_ff @(posedge clk) begin
    if (rst_n && !start) begin
      assert (!(rsp_valid && rf_cnt == OW'(MAX_OUT))) else $error("pe_lane: response FIFO overflow");
      assert (!(proc && (r != 3'd0) && !sb_hit)) else $error("pe_lane: continuation plane without scoreboard entry");
      assert (!(proc && sb_hit && sb_bit != 3'(r - 3'd1))) else $error("pe_lane: plane out of sequence");
    end
  end

endmodule
