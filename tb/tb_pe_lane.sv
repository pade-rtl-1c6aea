// tb_pe_lane: one bit-wise PE lane (LANE_ID 3) with its threshold produced
// by a bui_gf_module fed from the lane's own scores, and a behavioural
// bit-plane memory that answers requests after a random 3..40 cycle delay,
// choosing randomly among due answers (so planes come back out of order).
// Runs many windows with random 8-bit queries and keys and checks:
//  * every request is for a key of this lane (token = 3 + 16k, k < n_keys),
//    planes of one key are requested in order 0..7 and never twice;
//  * every retained key reports its exact score q.k and is reported once;
//  * every key ends retained or pruned (retained + pruned = n_keys), idle
//    rises at the end;
//  * no key whose exact score is above the final threshold was pruned (the
//    pruning is safe: the bound S + I_max[r] never underestimates);
//  * with a huge radius nothing is pruned;
//  * planes were processed out of order and continued from the scoreboard,
//    and with a 4-entry scoreboard (second instance) the lane waited on a full
//    scoreboard and still finished correctly.
module tb_pe_lane;
  import pade_pkg::*;
  localparam int LANE_ID = 3, KEYS_MAX = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // ------------ shared query data ------------
  q_t q [DIM];
  logic signed [QSUM_W-1:0] qsum [NGROUP];
  score_t imax [KBITS], imin [KBITS];
  logic [8:0] alpha_q;
  score_t radius;
  q_t keys [KEYS_MAX][DIM];
  int exact [KEYS_MAX];

  // two lanes under test: default scoreboard (a) and 4 entries (b)
  logic start = 0;
  logic [5:0] n_keys;
  int sel;            // which lane the current window runs on

  logic req_valid [2], req_ready [2], rsp_valid [2];
  logic [TOK_W-1:0] req_tok [2];
  logic [2:0] req_plane [2];
  plane_rsp_t rsp [2];
  logic s_valid [2][1];
  score_t s_score [2][1];
  logic [2:0] s_plane [2][1];
  logic fin_valid [2];
  logic [TOK_W-1:0] fin_tok [2];
  score_t fin_score [2];
  logic ev_plane [2], ev_hit [2], ev_prune [2], ev_ooe [2], ev_sbfull [2], idle [2];
  score_t thr [2];
  logic clr;

  for (genvar g = 0; g < 2; g++) begin : g_lane
    pe_lane #(.LANE_ID(LANE_ID), .ENTRIES(g == 0 ? SB_ENTRIES : 4), .MAX_OUT(4), .KEYS_MAX(KEYS_MAX)) dut (
      .clk, .rst_n, .start(start && sel == g), .n_keys, .q, .qsum, .imax, .thr(thr[g]),
      .req_valid(req_valid[g]), .req_ready(req_ready[g]), .req_tok(req_tok[g]), .req_plane(req_plane[g]),
      .rsp_valid(rsp_valid[g]), .rsp(rsp[g]),
      .s_valid(s_valid[g][0]), .s_score(s_score[g][0]), .s_plane(s_plane[g][0]),
      .fin_valid(fin_valid[g]), .fin_tok(fin_tok[g]), .fin_score(fin_score[g]),
      .ev_plane(ev_plane[g]), .ev_hit(ev_hit[g]), .ev_prune(ev_prune[g]), .ev_ooe(ev_ooe[g]),
      .ev_sbfull(ev_sbfull[g]), .idle(idle[g])
    );
    bui_gf_module #(.NLANE(1)) u_gf (
      .clk, .rst_n, .clear(clr), .alpha_q, .radius, .imin,
      .s_valid(s_valid[g]), .s_score(s_score[g]), .s_plane(s_plane[g]),
      .thr(thr[g]), .max_lb(), .have_max()
    );
  end

  // ------------ behavioural plane memory ------------
  typedef struct { int due; int tok; int plane; } pend_t;
  pend_t pend [$];
  int cyc = 0;
  int next_plane [KEYS_MAX];
  int retained [KEYS_MAX];
  int n_ret, n_prune, n_ooe, n_hit, n_full;
  int tot_ooe = 0, tot_hit = 0, tot_full = 0, tot_prune = 0;

  function automatic logic [DIM-1:0] plane_bits(int k, int r);
    logic [DIM-1:0] b;
    for (int j = 0; j < DIM; j++) b[j] = keys[k][j][7 - r];
    return b;
  endfunction

  always @(posedge clk) begin
    cyc <= cyc + 1;
  end

  // drive memory side just after each edge
  initial begin
    rsp_valid[0] = 0; rsp_valid[1] = 0; req_ready[0] = 0; req_ready[1] = 0;
    rsp[0] = '0; rsp[1] = '0;
    forever begin
      // drive this cycle's inputs at the falling edge, then sample what the
      // lane does at the coming rising edge
      @(negedge clk);
      req_ready[sel] = ($urandom % 4 != 0);
      rsp_valid[sel] = 0;
      begin
        int due [$];
        due.delete();
        for (int i = 0; i < pend.size(); i++) if (pend[i].due <= cyc) due.push_back(i);
        if (due.size() > 0 && $urandom % 3 != 0) begin
          int i, k;
          i = due[$urandom % due.size()];
          k = (pend[i].tok - LANE_ID) / LANES;
          rsp_valid[sel] = 1;
          rsp[sel] = '{tok: TOK_W'(pend[i].tok), plane: 3'(pend[i].plane), bits: plane_bits(k, pend[i].plane)};
          pend.delete(i);
        end
      end
      #1;
      if (rst_n && !start && req_valid[sel] && req_ready[sel]) begin
        int k, t, pl;
        t  = int'(req_tok[sel]);
        pl = int'(req_plane[sel]);
        k  = (t - LANE_ID) / LANES;
        checks++;
        if ((t - LANE_ID) % LANES != 0 || k >= int'(n_keys) || pl != next_plane[k]) begin
          failures++; $display("FAIL request tok=%0d plane=%0d", t, pl);
        end else next_plane[k]++;
        pend.push_back('{due: cyc + 3 + int'($urandom % 38), tok: t, plane: pl});
      end
      if (rst_n && !start) begin
        if (s_valid[sel][0]) begin
          n_hit += int'(ev_hit[sel]);
          n_ooe += int'(ev_ooe[sel]);
        end
        n_prune += int'(ev_prune[sel]);
        n_full  += int'(ev_sbfull[sel]);
        if (fin_valid[sel]) begin
          int k;
          k = (int'(fin_tok[sel]) - LANE_ID) / LANES;
          checks++;
          if (retained[k] != 0 || fin_score[sel] != exact[k]) begin
            failures++; $display("FAIL retained k=%0d score %0d exact %0d twice=%0d", k, fin_score[sel], exact[k], retained[k]);
          end
          retained[k]++;
          n_ret++;
        end
      end
    end
  end

  task automatic run_window(input int which, input int nk, input bit nothing_pruned);
    @(negedge clk);
    sel = which;
    n_keys = 6'(nk);
    for (int k = 0; k < KEYS_MAX; k++) begin next_plane[k] = 0; retained[k] = 0; end
    n_ret = 0; n_prune = 0; n_ooe = 0; n_hit = 0; n_full = 0;
    clr = 1; start = 1;
    @(negedge clk);
    clr = 0; start = 0;
    fork
      begin
        while (!idle[which]) @(negedge clk);
      end
      begin
        repeat (20000) @(negedge clk);
      end
    join_any
    disable fork;
    repeat (3) @(negedge clk);
    checks += 3;
    if (!idle[which]) begin failures++; $display("FAIL lane did not finish"); end
    if (n_ret + n_prune != nk) begin failures++; $display("FAIL retained %0d + pruned %0d != %0d", n_ret, n_prune, nk); end
    if (pend.size() != 0) begin failures++; $display("FAIL requests left"); end
    for (int k = 0; k < nk; k++) begin
      checks++;
      if (retained[k] == 0 && longint'(exact[k]) > longint'(thr[which])) begin
        failures++; $display("FAIL unsafe prune k=%0d exact %0d thr %0d", k, exact[k], thr[which]);
      end
    end
    if (nothing_pruned) begin
      checks++;
      if (n_prune != 0) begin failures++; $display("FAIL pruned with huge radius"); end
    end
    tot_ooe += n_ooe; tot_hit += n_hit; tot_full += n_full; tot_prune += n_prune;
  endtask

  initial begin
    sel = 0; n_keys = 0; clr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 60; t++) begin
      int nk;
      bit huge;
      for (int j = 0; j < DIM; j++) q[j] = q_t'($urandom);
      for (int g = 0; g < NGROUP; g++) begin
        int s; s = 0;
        for (int b = 0; b < GROUP; b++) s += int'(q[g*GROUP+b]);
        qsum[g] = QSUM_W'(s);
      end
      for (int r = 0; r < KBITS; r++) begin
        int hi, lo; hi = 0; lo = 0;
        for (int j = 0; j < DIM; j++) begin
          if (q[j] > 0) hi += int'(q[j]) * ((1 << (7 - r)) - 1);
          else lo += int'(q[j]) * ((1 << (7 - r)) - 1);
        end
        imax[r] = hi; imin[r] = lo;
      end
      for (int k = 0; k < KEYS_MAX; k++) begin
        int s; s = 0;
        for (int j = 0; j < DIM; j++) begin
          // correlated keys: some keys close to the query, most random
          keys[k][j] = (k % 7 == 0) ? q_t'(int'(q[j]) / 2 + int'($urandom % 9) - 4) : q_t'($urandom);
          s += int'(q[j]) * int'(keys[k][j]);
        end
        exact[k] = s;
      end
      huge    = (t % 10 == 9);
      alpha_q = 9'(64 + $urandom % 193);
      radius  = huge ? 32'sh4000_0000 : score_t'(2000 + $urandom % 20000);
      nk = (t < 2) ? KEYS_MAX : 1 + int'($urandom % KEYS_MAX);
      run_window(t % 2, nk, huge);
    end
    checks += 4;
    if (tot_ooe == 0)   begin failures++; $display("FAIL no out-of-order processing"); end
    if (tot_hit == 0)   begin failures++; $display("FAIL no scoreboard hits"); end
    if (tot_prune == 0) begin failures++; $display("FAIL nothing pruned"); end
    if (tot_full == 0)  begin failures++; $display("FAIL scoreboard never full"); end
    $display("COUNT ooe=%0d hit=%0d prune=%0d full=%0d", tot_ooe, tot_hit, tot_prune, tot_full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
