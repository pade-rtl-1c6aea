// tb_qk_pu: the QK unit (8 rows x 16 lanes, default sizes) with a real
// k_buffer (bit-plane layout, 24-cycle fetch) filled with 1024 random keys,
// some of them close to the queries so that scores spread widely. For each
// pass it loads 8 random queries, runs two or three 512-key windows (the
// BUI-GF threshold carries over between windows), and after every window
// reads the retained-key board tile by tile. Checks:
//  * every retained key carries its exact score q.k;
//  * no key whose exact score is above (best score of the pass so far) -
//    alpha*radius was dropped (safe pruning);
//  * with a huge radius every key is retained;
//  * partial windows (win_len < 512) retain nothing beyond win_len;
//  * cnt_retained matches the board, and pruning, scoreboard hits,
//    out-of-order processing and arbiter stalls all occurred.
module tb_qk_pu;
  import pade_pkg::*;
  localparam int NROW = ROWS, NLANE = LANES, WIN = 512, NKEY = 1024;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic [8:0] alpha_q;
  score_t radius;
  logic q_load = 0;
  logic [ROW_W-1:0] q_row = 0;
  logic [DIM*KBITS-1:0] q_vec = 0;
  logic win_start = 0, win_done;
  logic [11:0] win_base = 0;
  logic [TOK_W:0] win_len = 0;
  logic kb_rd_valid [NROW];
  logic [14:0] kb_rd_addr [NROW];
  plane_req_t kb_rd_tag [NROW];
  logic kb_rsp_valid [NROW];
  logic [DIM-1:0] kb_rsp_data [NROW];
  plane_req_t kb_rsp_tag [NROW];
  logic ret_valid [NROW][WIN];
  logic [4:0] ret_tile = 0;
  score_t ret_score [NROW][NLANE];
  logic [31:0] cnt_planes, cnt_prune, cnt_hit, cnt_ooe, cnt_retained, cnt_sbfull, cnt_arb_stall;

  qk_pu dut (.*);

  logic k_wr_en = 0;
  logic [14:0] k_wr_addr = 0;
  logic [DIM-1:0] k_wr_data = 0;
  k_buffer #(.ENTRIES(NKEY * 8), .NPORT(NROW), .FETCH_LAT(24), .AW(15)) u_kb (
    .clk, .rst_n, .wr_en(k_wr_en), .wr_addr(k_wr_addr), .wr_data(k_wr_data),
    .rd_valid(kb_rd_valid), .rd_addr(kb_rd_addr), .rd_tag(kb_rd_tag),
    .rsp_valid(kb_rsp_valid), .rsp_data(kb_rsp_data), .rsp_tag(kb_rsp_tag)
  );

  q_t keys [NKEY][DIM];
  q_t qs [NROW][DIM];
  int exact [NROW][NKEY];
  int n_ret_total = 0;

  task automatic write_keys(int pass);
    for (int k = 0; k < NKEY; k++)
      for (int j = 0; j < DIM; j++)
        keys[k][j] = ($urandom % 23 == 0) ? q_t'(int'(qs[k % NROW][j]) / 2 + int'($urandom % 5) - 2) : q_t'($urandom);
    for (int k = 0; k < NKEY; k++)
      for (int r = 0; r < 8; r++) begin
        @(negedge clk);
        k_wr_en = 1; k_wr_addr = 15'(k * 8 + r);
        for (int j = 0; j < DIM; j++) k_wr_data[j] = keys[k][j][7 - r];
      end
    @(negedge clk); k_wr_en = 0;
    for (int i = 0; i < NROW; i++)
      for (int k = 0; k < NKEY; k++) begin
        int s; s = 0;
        for (int j = 0; j < DIM; j++) s += int'(qs[i][j]) * int'(keys[k][j]);
        exact[i][k] = s;
      end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int pass = 0; pass < 4; pass++) begin
      int best [NROW];
      bit huge;
      int nw;
      huge = (pass == 3);
      alpha_q = 9'(128 + $urandom % 128);
      radius  = huge ? 32'sh4000_0000 : score_t'(3000 + $urandom % 6000);
      for (int i = 0; i < NROW; i++) for (int j = 0; j < DIM; j++) qs[i][j] = q_t'($urandom);
      write_keys(pass);
      for (int i = 0; i < NROW; i++) begin
        @(negedge clk);
        q_load = 1; q_row = ROW_W'(i);
        for (int j = 0; j < DIM; j++) q_vec[j*8 +: 8] = qs[i][j];
      end
      @(negedge clk); q_load = 0;
      @(negedge clk);
      for (int i = 0; i < NROW; i++) best[i] = -(1 << 30);
      nw = (pass == 1) ? 3 : 2;
      for (int w = 0; w < nw; w++) begin
        int base, len, nret;
        logic [31:0] r0;
        base = (w == 2) ? 256 : w * 512;
        len  = (w == 2) ? 300 : (pass == 2 && w == 1) ? 77 : 512;
        r0 = cnt_retained;
        @(negedge clk);
        win_start = 1; win_base = 12'(base); win_len = (TOK_W+1)'(len);
        @(negedge clk);
        win_start = 0;
        fork
          begin @(negedge clk); while (!win_done) @(negedge clk); end
          begin repeat (100000) @(negedge clk); failures++; $display("FAIL window timeout"); end
        join_any
        disable fork;
        for (int i = 0; i < NROW; i++)
          for (int p = 0; p < len; p++) if (exact[i][base + p] > best[i]) best[i] = exact[i][base + p];
        nret = 0;
        for (int t = 0; t < WIN / NLANE; t++) begin
          ret_tile = 5'(t);
          #1;
          for (int i = 0; i < NROW; i++)
            for (int l = 0; l < NLANE; l++) begin
              int p;
              p = t * NLANE + l;
              checks++;
              if (ret_valid[i][p]) begin
                nret++;
                if (p >= len) begin failures++; $display("FAIL retained beyond window p=%0d", p); end
                else if (ret_score[i][l] != exact[i][base + p]) begin
                  failures++; $display("FAIL score row %0d pos %0d: %0d vs %0d", i, p, ret_score[i][l], exact[i][base + p]);
                end
              end else if (p < len) begin
                longint lim;
                lim = longint'(best[i]) - ((longint'(radius) * longint'(alpha_q)) >>> 8);
                if (longint'(exact[i][base + p]) > lim || huge) begin
                  failures++; $display("FAIL unsafe prune pass %0d row %0d pos %0d score %0d best %0d", pass, i, p, exact[i][base + p], best[i]);
                end
              end
            end
        end
        checks++;
        if (int'(cnt_retained - r0) != nret) begin failures++; $display("FAIL cnt_retained %0d vs %0d", cnt_retained - r0, nret); end
        n_ret_total += nret;
      end
    end
    checks++;
    if (cnt_prune == 0 || cnt_hit == 0 || cnt_ooe == 0 || cnt_arb_stall == 0 || n_ret_total == 0) begin
      failures++; $display("FAIL mechanism missing");
    end
    $display("COUNT planes=%0d prune=%0d hit=%0d ooe=%0d retained=%0d sbfull=%0d stall=%0d",
             cnt_planes, cnt_prune, cnt_hit, cnt_ooe, cnt_retained, cnt_sbfull, cnt_arb_stall);
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
