// qk_pu: query-key processing unit.
//
// Scores 8 queries (one per PE row) against a window of up to WIN keys and
// keeps, per row, only the keys that survive bit-serial guarded filtering.
// Contents:
//   * 8 rows x 16 pe_lane instances. Lane l of a row owns window keys
//     l, l+16, l+32, ... and works through them out of order, one bit plane
//     at a time (see pe_lane).
//   * 8 bui_gf_module instances, one per row, turning the row's partial
//     scores into the pruning threshold broadcast to its lanes.
//   * One bui_generator and one qsum_generator, shared: while q_load is
//     pulsed for rows 0..7 (one per cycle) they compute each query's
//     uncertainty-interval table and sub-group sums, stored per row.
//   * Per row a round-robin arbiter that passes one of the 16 lanes'
//     plane requests per cycle to the row's key-buffer port, and routes the
//     returned planes back to the requesting lane.
//   * Per row a Retained Key Board: a valid bit and the exact score of every
//     window position that passed all 8 bit planes, read by the V unit.
// The row/lane organisation, the BUI-GF modules, the shared generators and
// the retained-key board follow the published QK unit; the arbiter, the
// window size WIN (2^TOK_W) and the key-to-lane mapping are this design's
// choices. The threshold state is cleared by q_load of row 0 (new pass) and
// kept across windows.
//
// Interface and timing: q_load/q_row/q_vec load queries (1 per cycle);
// win_start with win_base (buffer token of window position 0) and win_len
// starts a window; win_done rises when every lane is idle. kb_* is the
// row-wise key-buffer port. ret_valid[i][w] is the retained-key board's
// flag of row i, window position w; ret_tile selects a tile of NLANE
// positions whose exact scores appear on ret_score[i][0..NLANE-1]
// (combinational read). cnt_* are running event counters (cleared by reset).
// The threshold modules' max_lb / have_max outputs are left open on purpose:
// they only expose the running maximum for observation, nothing here needs
// them.
module qk_pu
  import pade_pkg::*;
#(
  parameter int unsigned NROW  = ROWS,
  parameter int unsigned NLANE = LANES,
  parameter int unsigned WIN   = 1 << TOK_W,
  parameter int unsigned KAW   = 15,
  parameter int unsigned BASEW = 12
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // configuration
  input  logic [8:0]             alpha_q,
  input  score_t                 radius,
  // query loading
  input  logic                   q_load,
  input  logic [ROW_W-1:0]       q_row,
  input  logic [DIM*KBITS-1:0]   q_vec,
  // windows
  input  logic                   win_start,
  input  logic [BASEW-1:0]       win_base,
  input  logic [TOK_W:0]         win_len,
  output logic                   win_done,
  // key buffer ports
  output logic                   kb_rd_valid [NROW],
  output logic [KAW-1:0]         kb_rd_addr  [NROW],
  output plane_req_t             kb_rd_tag   [NROW],
  input  logic                   kb_rsp_valid[NROW],
  input  logic [DIM-1:0]         kb_rsp_data [NROW],
  input  plane_req_t             kb_rsp_tag  [NROW],
  // retained key board
  output logic                   ret_valid   [NROW][WIN],
  input  logic [$clog2(WIN/NLANE)-1:0] ret_tile,
  output score_t                 ret_score   [NROW][NLANE],
  // statistics
  output logic [31:0]            cnt_planes,
  output logic [31:0]            cnt_prune,
  output logic [31:0]            cnt_hit,
  output logic [31:0]            cnt_ooe,
  output logic [31:0]            cnt_retained,
  output logic [31:0]            cnt_sbfull,
  output logic [31:0]            cnt_arb_stall
);

  localparam int unsigned KPL = WIN / NLANE;           // keys per lane
  localparam int unsigned KW  = $clog2(KPL+1);

  // ---------------- query registers and shared generators ----------------
  q_t                       qv_in   [DIM];
  q_t                       q_r     [NROW][DIM];
  logic signed [QSUM_W-1:0] qsum_g  [NGROUP];
  logic signed [QSUM_W-1:0] qsum_r  [NROW][NGROUP];
  score_t                   imin_g  [KBITS], imax_g [KBITS];
  score_t                   imin_r  [NROW][KBITS], imax_r [NROW][KBITS];
  logic                     ld_d;
  logic [ROW_W-1:0]         ld_row_d;

  always_comb
    for (int j = 0; j < DIM; j++) qv_in[j] = q_t'(q_vec[j*KBITS +: KBITS]);

  qsum_generator u_qsum (.clk, .rst_n, .en(q_load), .q(qv_in), .qsum(qsum_g));
  bui_generator  u_bui  (.clk, .rst_n, .en(q_load), .q(qv_in), .imin(imin_g), .imax(imax_g));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ld_d <= 1'b0; ld_row_d <= '0;
      for (int i = 0; i < NROW; i++) begin
        for (int j = 0; j < DIM; j++) q_r[i][j] <= '0;
        for (int g = 0; g < NGROUP; g++) qsum_r[i][g] <= '0;
        for (int r = 0; r < KBITS; r++) begin imin_r[i][r] <= '0; imax_r[i][r] <= '0; end
      end
    end else begin
      ld_d     <= q_load;
      ld_row_d <= q_row;
      if (q_load) q_r[q_row] <= qv_in;
      if (ld_d) begin
        qsum_r[ld_row_d] <= qsum_g;
        imin_r[ld_row_d] <= imin_g;
        imax_r[ld_row_d] <= imax_g;
      end
    end
  end

  logic pass_clear;
  assign pass_clear = q_load && (q_row == '0);

  // ---------------- rows ----------------
  logic idle_l [NROW][NLANE];
  logic [NROW*NLANE-1:0] idle_flat;
  logic [31:0] planes_c, prune_c, hit_c, ooe_c, ret_c, sbf_c, stall_c;
  logic [7:0]  ev_planes [NROW], ev_prune [NROW], ev_hit [NROW], ev_ooe [NROW], ev_ret [NROW], ev_sbf [NROW], ev_stall [NROW];

  for (genvar i = 0; i < NROW; i++) begin : g_row
    score_t     thr;
    logic       s_valid [NLANE];
    score_t     s_score [NLANE];
    logic [2:0] s_plane [NLANE];
    logic       rq_v [NLANE], rq_rdy [NLANE];
    logic [TOK_W-1:0] rq_tok [NLANE];
    logic [2:0] rq_pl [NLANE];
    logic       fin_v [NLANE];
    logic [TOK_W-1:0] fin_tok [NLANE];
    score_t     fin_s [NLANE];
    logic       e_pl [NLANE], e_hit [NLANE], e_pr [NLANE], e_ooe [NLANE], e_sbf [NLANE];
    logic [LANE_W-1:0] rr_q;   // round-robin pointer
    logic [LANE_W-1:0] gnt;
    logic              gnt_v;

    bui_gf_module #(.NLANE(NLANE)) u_gf (
      .clk, .rst_n, .clear(pass_clear), .alpha_q, .radius,
      .imin(imin_r[i]), .s_valid, .s_score, .s_plane,
      .thr(thr), .max_lb(), .have_max()
    );

    for (genvar l = 0; l < NLANE; l++) begin : g_lane
      logic [KW-1:0] nk;
      always_comb begin
        if (32'(win_len) > l) nk = KW'((32'(win_len) - l + NLANE - 1) / NLANE);
        else                  nk = '0;
      end
      pe_lane #(.LANE_ID(l), .KEYS_MAX(KPL)) u_lane (
        .clk, .rst_n, .start(win_start), .n_keys(nk),
        .q(q_r[i]), .qsum(qsum_r[i]), .imax(imax_r[i]), .thr(thr),
        .req_valid(rq_v[l]), .req_ready(rq_rdy[l]), .req_tok(rq_tok[l]), .req_plane(rq_pl[l]),
        .rsp_valid(kb_rsp_valid[i] && kb_rsp_tag[i].lane == LANE_W'(l)),
        .rsp('{tok: kb_rsp_tag[i].tok, plane: kb_rsp_tag[i].plane, bits: kb_rsp_data[i]}),
        .s_valid(s_valid[l]), .s_score(s_score[l]), .s_plane(s_plane[l]),
        .fin_valid(fin_v[l]), .fin_tok(fin_tok[l]), .fin_score(fin_s[l]),
        .ev_plane(e_pl[l]), .ev_hit(e_hit[l]), .ev_prune(e_pr[l]), .ev_ooe(e_ooe[l]),
        .ev_sbfull(e_sbf[l]), .idle(idle_l[i][l])
      );
    end

    // round-robin arbiter: first requesting lane at or after rr_q
    always_comb begin
      gnt   = '0;
      gnt_v = 1'b0;
      for (int k = NLANE-1; k >= 0; k--) begin
        int unsigned c;
        c = (32'(rr_q) + 32'(k)) % NLANE;
        if (rq_v[c]) begin
          gnt   = LANE_W'(c);
          gnt_v = 1'b1;
        end
      end
      for (int l = 0; l < NLANE; l++) rq_rdy[l] = gnt_v && (gnt == LANE_W'(l));
    end

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) rr_q <= '0;
      else if (gnt_v) rr_q <= gnt + 1'b1;
    end

    assign kb_rd_valid[i] = gnt_v;
    assign kb_rd_addr[i]  = KAW'(((32'(win_base) + 32'(rq_tok[gnt])) << 3) + 32'(rq_pl[gnt]));
    assign kb_rd_tag[i]   = '{lane: gnt, tok: rq_tok[gnt], plane: rq_pl[gnt]};

    // retained key board: lane l owns window positions l + NLANE*k, so its
    // scores live in its own KPL-entry memory (one write port, from the
    // lane) addressed by k; the V unit reads tile k (positions NLANE*k ..
    // NLANE*k+NLANE-1) as entry k of all lanes. Valid bits are flops so that
    // win_start can clear them at once.
    for (genvar l = 0; l < NLANE; l++) begin : g_rkb
      score_t        rs_mem [KPL];
      logic [KPL-1:0] rv_q;
      always_ff @(posedge clk) begin
        if (fin_v[l]) rs_mem[fin_tok[l][TOK_W-1:LANE_W]] <= fin_s[l];
      end
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n)         rv_q <= '0;
        else if (win_start) rv_q <= '0;
        else if (fin_v[l])  rv_q[fin_tok[l][TOK_W-1:LANE_W]] <= 1'b1;
      end
      assign ret_score[i][l] = rs_mem[ret_tile];
      for (genvar k = 0; k < KPL; k++) begin : g_v
        assign ret_valid[i][k*NLANE + l] = rv_q[k];
      end
    end

    // per-row event counts of this cycle
    always_comb begin
      int unsigned requesting;
      ev_planes[i] = '0; ev_prune[i] = '0; ev_hit[i] = '0; ev_ooe[i] = '0;
      ev_ret[i] = '0; ev_sbf[i] = '0;
      requesting = 0;
      for (int l = 0; l < NLANE; l++) begin
        ev_planes[i] += 8'(e_pl[l]);
        ev_prune[i]  += 8'(e_pr[l]);
        ev_hit[i]    += 8'(e_hit[l]);
        ev_ooe[i]    += 8'(e_ooe[l]);
        ev_ret[i]    += 8'(fin_v[l]);
        ev_sbf[i]    += 8'(e_sbf[l]);
        requesting   += 32'(rq_v[l]);
      end
      ev_stall[i] = (requesting > 1) ? 8'(requesting - 1) : 8'd0;
    end
  end

  always_comb begin
    for (int i = 0; i < NROW; i++)
      for (int l = 0; l < NLANE; l++) idle_flat[i*NLANE+l] = idle_l[i][l];
  end

  // win_done: all lanes idle, at least one cycle after win_start
  logic started_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) started_q <= 1'b0;
    else        started_q <= win_start;
  end
  assign win_done = !win_start && !started_q && (&idle_flat);

  // statistics
  logic [31:0] sum_pl, sum_pr, sum_hit, sum_ooe, sum_ret, sum_sbf, sum_st;
  always_comb begin
    sum_pl = '0; sum_pr = '0; sum_hit = '0; sum_ooe = '0; sum_ret = '0; sum_sbf = '0; sum_st = '0;
    for (int i = 0; i < NROW; i++) begin
      sum_pl  += 32'(ev_planes[i]);
      sum_pr  += 32'(ev_prune[i]);
      sum_hit += 32'(ev_hit[i]);
      sum_ooe += 32'(ev_ooe[i]);
      sum_ret += 32'(ev_ret[i]);
      sum_sbf += 32'(ev_sbf[i]);
      sum_st  += 32'(ev_stall[i]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      planes_c <= '0; prune_c <= '0; hit_c <= '0; ooe_c <= '0; ret_c <= '0; sbf_c <= '0; stall_c <= '0;
    end else begin
      planes_c <= planes_c + sum_pl;
      prune_c  <= prune_c  + sum_pr;
      hit_c    <= hit_c    + sum_hit;
      ooe_c    <= ooe_c    + sum_ooe;
      ret_c    <= ret_c    + sum_ret;
      sbf_c    <= sbf_c    + sum_sbf;
      stall_c  <= stall_c  + sum_st;
    end
  end

  assign cnt_planes    = planes_c;
  assign cnt_prune     = prune_c;
  assign cnt_hit       = hit_c;
  assign cnt_ooe       = ooe_c;
  assign cnt_retained  = ret_c;
  assign cnt_sbfull    = sbf_c;
  assign cnt_arb_stall = stall_c;

endmodule
