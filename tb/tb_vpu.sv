// tb_vpu: the V unit against a bit-exact model of its fixed-point online
// softmax kept here. Each test clears the pass, runs 1 to 4 windows whose
// Retained Key Boards are random (dense, sparse, empty tiles, empty rows,
// partial last tile), with random scores and value vectors, then runs the
// final division. Checks out_o and out_l element by element against the
// model, and the counters: processed and skipped tiles, V loads (one per
// value needed by at least one row of a tile), running-maximum updates, and
// RARS rounds >= tiles (at least one round per processed tile).
// The model: per tile, m_new = max(m, retained scores); corr = exp2q(m_new -
// m) (0 for a row's first tile); p = sat255(exp2q(m_new - s)) for retained
// keys; l = (l*corr >> 8) + sum p; O = (O*corr) >>> 8 + sum p*V; finally
// out = (O << 8) / l. The value-buffer is a behavioural 1-cycle memory.
module tb_vpu;
  import pade_pkg::*;
  localparam int NR = ROWS, WIN = 1 << TOK_W, TILE = LANES, NV = 2560;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [15:0] exp_scale;
  logic pass_clear = 0, win_start = 0, fin_start = 0, busy;
  logic [11:0] win_base;
  logic [TOK_W:0] win_len;
  logic   ret_valid [NR][WIN];
  score_t board [NR][WIN];
  logic [$clog2(WIN/TILE)-1:0] ret_tile;
  score_t ret_score [NR][TILE];
  // retained key board read port (combinational, like the QK unit's)
  always_comb
    for (int i = 0; i < NR; i++)
      for (int v = 0; v < TILE; v++) ret_score[i][v] = board[i][32'(ret_tile) * TILE + v];
  logic vb_rd_en;
  logic [11:0] vb_rd_addr;
  logic [DIM*KBITS-1:0] vb_rd_data;
  logic signed [15:0] out_o [NR][DIM];
  logic [31:0] out_l [NR];
  logic [31:0] cnt_tiles, cnt_skipped, cnt_vloads, cnt_max_upd, cnt_rounds;

  vpu dut (.*);

  // behavioural value buffer
  logic signed [7:0] vmem [NV][DIM];
  always_ff @(posedge clk) begin
    if (vb_rd_en) for (int d = 0; d < DIM; d++) vb_rd_data[d*KBITS +: KBITS] <= vmem[vb_rd_addr][d];
  end

  // model state
  longint m_m [NR];
  bit     m_have [NR];
  longint m_l [NR];
  longint m_o [NR][DIM];
  int     e_tiles, e_skip, e_vl, e_mu;

  function automatic longint sat255(logic [8:0] e);
    return (e > 9'd255) ? 255 : longint'(e);
  endfunction

  task automatic model_window(int base, int len);
    int nt;
    nt = (len + TILE - 1) / TILE;
    for (int t = 0; t < nt; t++) begin
      bit any, rany [NR], need [TILE];
      longint mn [NR], p [NR][TILE];
      any = 0;
      for (int v = 0; v < TILE; v++) need[v] = 0;
      for (int i = 0; i < NR; i++) begin
        rany[i] = 0; mn[i] = m_m[i];
        for (int v = 0; v < TILE; v++) begin
          int pos; pos = t * TILE + v;
          if (pos < len && ret_valid[i][pos]) begin
            if ((!m_have[i] && !rany[i]) || longint'(board[i][pos]) > mn[i]) mn[i] = longint'(board[i][pos]);
            rany[i] = 1; any = 1; need[v] = 1;
          end
        end
      end
      if (!any) begin e_skip++; continue; end
      e_tiles++;
      for (int v = 0; v < TILE; v++) e_vl += int'(need[v]);
      for (int i = 0; i < NR; i++) begin
        longint corr, ps;
        if (!rany[i]) continue;
        if (m_have[i] && mn[i] > m_m[i]) e_mu++;
        corr = m_have[i] ? longint'(exp2q(32'(mn[i] - m_m[i]), exp_scale)) : 0;
        ps = 0;
        for (int v = 0; v < TILE; v++) begin
          int pos; pos = t * TILE + v;
          p[i][v] = (pos < len && ret_valid[i][pos]) ? sat255(exp2q(32'(mn[i] - longint'(board[i][pos])), exp_scale)) : 0;
          ps += p[i][v];
        end
        m_l[i] = ((m_l[i] * corr) >> 8) % (longint'(1) << 32) + ps;
        m_l[i] = m_l[i] % (longint'(1) << 32);
        for (int d = 0; d < DIM; d++) begin
          longint acc; acc = 0;
          for (int v = 0; v < TILE; v++) acc += p[i][v] * longint'(vmem[base + t * TILE + v][d]);
          m_o[i][d] = ((m_o[i][d] * corr) >>> 8) + acc;
        end
        m_m[i] = mn[i]; m_have[i] = 1;
      end
    end
  endtask

  task automatic wait_idle();
    @(negedge clk);
    fork
      begin while (busy) @(negedge clk); end
      begin repeat (200000) @(negedge clk); end
    join_any
    disable fork;
  endtask

  initial begin
    for (int a = 0; a < NV; a++) for (int d = 0; d < DIM; d++) vmem[a][d] = 8'($urandom);
    for (int i = 0; i < NR; i++) for (int p = 0; p < WIN; p++) begin ret_valid[i][p] = 0; board[i][p] = 0; end
    win_base = 0; win_len = 0; exp_scale = 16'd400;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int test = 0; test < 12; test++) begin
      int nwin;
      logic [31:0] t0, s0, v0, u0, r0;
      @(negedge clk);
      exp_scale = 16'(100 + $urandom % 1500);
      pass_clear = 1;
      @(negedge clk);
      pass_clear = 0;
      for (int i = 0; i < NR; i++) begin m_m[i] = 0; m_have[i] = 0; m_l[i] = 0; for (int d = 0; d < DIM; d++) m_o[i][d] = 0; end
      e_tiles = 0; e_skip = 0; e_vl = 0; e_mu = 0;
      t0 = cnt_tiles; s0 = cnt_skipped; v0 = cnt_vloads; u0 = cnt_max_upd; r0 = cnt_rounds;
      nwin = 1 + int'($urandom % 4);
      for (int w = 0; w < nwin; w++) begin
        int base, len, dens, hot;
        base = int'($urandom % 4) * 512;
        len  = (test == 0) ? 512 : 1 + int'($urandom % 512);
        dens = (test == 0) ? 2 : 1 + int'($urandom % 12);
        hot  = int'($urandom % 32);
        for (int i = 0; i < NR; i++) begin
          bit row_off;
          row_off = ($urandom % 6 == 0);
          for (int p = 0; p < WIN; p++) begin
            // some tiles entirely empty; rising scores so the max moves
            ret_valid[i][p] = !row_off && ((p / TILE) % 5 != 3) && ($urandom % dens == 0);
            board[i][p] = score_t'(w * 3000 + p * 7 + int'($urandom % 20000) - 10000 + ((p / TILE == hot) ? 30000 : 0));
          end
        end
        @(negedge clk);
        win_base = 12'(base); win_len = (TOK_W+1)'(len); win_start = 1;
        @(negedge clk);
        win_start = 0;
        wait_idle();
        model_window(base, len);
      end
      @(negedge clk); fin_start = 1;
      @(negedge clk); fin_start = 0;
      wait_idle();
      for (int i = 0; i < NR; i++) begin
        checks++;
        if (longint'(out_l[i]) != m_l[i]) begin failures++; $display("FAIL test %0d l[%0d] %0d vs %0d", test, i, out_l[i], m_l[i]); end
        for (int d = 0; d < DIM; d++) begin
          longint e;
          e = (m_l[i] == 0) ? 0 : ((m_o[i][d] * 256) / m_l[i]);
          checks++;
          if (out_o[i][d] != 16'(e)) begin
            failures++;
            if (failures < 10) $display("FAIL test %0d o[%0d][%0d] %0d vs %0d", test, i, d, out_o[i][d], 16'(e));
          end
        end
      end
      checks += 5;
      if (int'(cnt_tiles - t0) != e_tiles) begin failures++; $display("FAIL tiles %0d vs %0d", cnt_tiles - t0, e_tiles); end
      if (int'(cnt_skipped - s0) != e_skip) begin failures++; $display("FAIL skipped %0d vs %0d", cnt_skipped - s0, e_skip); end
      if (int'(cnt_vloads - v0) != e_vl) begin failures++; $display("FAIL vloads %0d vs %0d", cnt_vloads - v0, e_vl); end
      if (int'(cnt_max_upd - u0) != e_mu) begin failures++; $display("FAIL max updates %0d vs %0d", cnt_max_upd - u0, e_mu); end
      if (int'(cnt_rounds - r0) < e_tiles) begin failures++; $display("FAIL rounds"); end
    end
    checks++;
    if (cnt_skipped == 0 || cnt_max_upd == 0 || cnt_rounds <= cnt_tiles) begin
      failures++; $display("FAIL mechanisms not exercised: skip %0d mu %0d rounds %0d tiles %0d", cnt_skipped, cnt_max_upd, cnt_rounds, cnt_tiles);
    end
    $display("COUNT tiles=%0d skipped=%0d vloads=%0d max_upd=%0d rounds=%0d", cnt_tiles, cnt_skipped, cnt_vloads, cnt_max_upd, cnt_rounds);
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
