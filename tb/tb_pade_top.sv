// tb_pade_top: end-to-end test of the accelerator at its default (published)
// sizes. The buffers are filled through the DMA write ports with random
// queries, keys and values; a few "hot" keys are made similar to the
// queries so that attention is concentrated as in real models. Each run
// starts a pass (8 queries from q_base, n_keys keys), waits for done and
// compares every output element with a floating-point attention computed
// here over all keys, softmax base 2 with input score*exp_scale/65536:
// out = sum_j 2^(x_j - max) V_j / sum_j 2^(x_j - max). The tolerance covers
// the 8-bit softmax weights, the 16-entry exponential table and the keys the
// design drops (each below 2^-(alpha*radius) of the maximum).
// Runs: 1100 keys (3 windows: head, tail, middle), 300 keys (1 partial
// window) and 512 keys (exactly one window) with different query bases.
// Afterwards every mechanism must have happened at least once: bit-plane
// scoring, BUI-GF pruning, scoreboard continuation hits, out-of-order plane
// processing, retained keys, lane-arbiter stalls, V tiles, skipped (fully
// pruned) tiles, V loads, online-softmax maximum updates, multi-round RARS
// schedules (more rounds than tiles), several windows and head-tail jumps.
// The scoreboard-full stall cannot occur at the default sizes (32 entries
// for at most 32 keys per lane and window) and is not required.
module tb_pade_top;
  import pade_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic q_wr_en = 0, k_wr_en = 0, v_wr_en = 0;
  logic [8:0] q_wr_addr = 0;
  logic [14:0] k_wr_addr = 0;
  logic [11:0] v_wr_addr = 0;
  logic [DIM*KBITS-1:0] q_wr_data = 0, v_wr_data = 0;
  logic [DIM-1:0] k_wr_data = 0;
  logic [8:0] alpha_q;
  score_t radius;
  logic [15:0] exp_scale;
  logic start = 0, busy, done;
  logic [8:0] q_base = 0;
  logic [11:0] n_keys = 0;
  logic signed [15:0] out_o [ROWS][DIM];
  logic [31:0] out_l [ROWS];
  logic [31:0] cnt_planes, cnt_prune, cnt_hit, cnt_ooe, cnt_retained, cnt_sbfull, cnt_arb_stall,
               cnt_tiles, cnt_skipped, cnt_vloads, cnt_max_upd, cnt_rounds, cnt_windows, cnt_tail_jumps;

  pade_top dut (.*);

  localparam int NK = 1100, NQ = 32;
  q_t qs [NQ][DIM];
  q_t ks [NK][DIM];
  q_t vs [NK][DIM];
  real max_err = 0.0;

  task automatic fill();
    for (int a = 0; a < NQ; a++) for (int j = 0; j < DIM; j++) qs[a][j] = q_t'($urandom);
    for (int k = 0; k < NK; k++)
      for (int j = 0; j < DIM; j++) begin
        ks[k][j] = ($urandom % 40 == 0) ? q_t'(int'(qs[k % NQ][j]) / 2 + int'($urandom % 7) - 3) : q_t'($urandom);
        vs[k][j] = q_t'($urandom);
      end
    for (int a = 0; a < NQ; a++) begin
      @(negedge clk);
      q_wr_en = 1; q_wr_addr = 9'(a);
      for (int j = 0; j < DIM; j++) q_wr_data[j*8 +: 8] = qs[a][j];
    end
    @(negedge clk); q_wr_en = 0;
    for (int k = 0; k < NK; k++) begin
      @(negedge clk);
      v_wr_en = 1; v_wr_addr = 12'(k);
      for (int j = 0; j < DIM; j++) v_wr_data[j*8 +: 8] = vs[k][j];
      for (int r = 0; r < 8; r++) begin
        @(negedge clk);
        v_wr_en = 0;
        k_wr_en = 1; k_wr_addr = 15'(k * 8 + r);
        for (int j = 0; j < DIM; j++) k_wr_data[j] = ks[k][j][7 - r];
      end
      @(negedge clk); k_wr_en = 0;
    end
  endtask

  task automatic run(int qb, int nk);
    int cyc;
    @(negedge clk);
    start = 1; q_base = 9'(qb); n_keys = 12'(nk);
    @(negedge clk);
    start = 0;
    cyc = 0;
    while (!done && cyc < 400000) begin @(negedge clk); cyc++; end
    checks++;
    if (!done) begin failures++; $display("FAIL no done for n_keys=%0d", nk); return; end
    $display("run q_base=%0d n_keys=%0d: %0d cycles", qb, nk, cyc);
    for (int i = 0; i < ROWS; i++) begin
      real sc [NK];
      real mx, den;
      real num [DIM];
      mx = -1.0e30;
      for (int k = 0; k < nk; k++) begin
        longint s; s = 0;
        for (int j = 0; j < DIM; j++) s += longint'(qs[qb + i][j]) * longint'(ks[k][j]);
        sc[k] = real'(s) * real'(exp_scale) / 65536.0;
        if (sc[k] > mx) mx = sc[k];
      end
      den = 0.0;
      for (int d = 0; d < DIM; d++) num[d] = 0.0;
      for (int k = 0; k < nk; k++) begin
        real w;
        w = 2.0 ** (sc[k] - mx);
        den += w;
        for (int d = 0; d < DIM; d++) num[d] += w * real'(vs[k][d]);
      end
      for (int d = 0; d < DIM; d++) begin
        real ref_o, got, err;
        ref_o = num[d] / den;
        got = real'(out_o[i][d]) / 256.0;
        err = (got > ref_o) ? got - ref_o : ref_o - got;
        if (err > max_err) max_err = err;
        checks++;
        if (err > 6.0) begin
          failures++;
          if (failures < 10) $display("FAIL row %0d d %0d: got %f ref %f", i, d, got, ref_o);
        end
      end
    end
  endtask

  initial begin
    alpha_q   = 9'd256;
    exp_scale = 16'd16;            // 1 log2 unit = 4096 score units
    radius    = 32'sd29544;        // 5 natural-log units = 7.21 log2 units
    repeat (3) @(posedge clk);
    rst_n = 1;
    fill();
    run(0, NK);
    run(8, 300);
    run(17, 512);
    $display("COUNT planes=%0d prune=%0d hit=%0d ooe=%0d retained=%0d sbfull=%0d stall=%0d",
             cnt_planes, cnt_prune, cnt_hit, cnt_ooe, cnt_retained, cnt_sbfull, cnt_arb_stall);
    $display("COUNT tiles=%0d skipped=%0d vloads=%0d max_upd=%0d rounds=%0d windows=%0d jumps=%0d max_err=%f",
             cnt_tiles, cnt_skipped, cnt_vloads, cnt_max_upd, cnt_rounds, cnt_windows, cnt_tail_jumps, max_err);
    checks += 13;
    if (cnt_planes == 0)     begin failures++; $display("FAIL no bit-plane scoring"); end
    if (cnt_prune == 0)      begin failures++; $display("FAIL no pruning"); end
    if (cnt_hit == 0)        begin failures++; $display("FAIL no scoreboard hits"); end
    if (cnt_ooe == 0)        begin failures++; $display("FAIL no out-of-order processing"); end
    if (cnt_retained == 0)   begin failures++; $display("FAIL no retained keys"); end
    if (cnt_arb_stall == 0)  begin failures++; $display("FAIL no arbiter stalls"); end
    if (cnt_tiles == 0)      begin failures++; $display("FAIL no V tiles"); end
    if (cnt_skipped == 0)    begin failures++; $display("FAIL no skipped tiles"); end
    if (cnt_vloads == 0)     begin failures++; $display("FAIL no V loads"); end
    if (cnt_max_upd == 0)    begin failures++; $display("FAIL no max updates"); end
    if (cnt_rounds <= cnt_tiles) begin failures++; $display("FAIL no multi-round RARS schedule"); end
    if (cnt_windows < 5)     begin failures++; $display("FAIL windows %0d", cnt_windows); end
    if (cnt_tail_jumps == 0) begin failures++; $display("FAIL no head-tail interleaving"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
