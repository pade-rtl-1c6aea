// vpu: value processing unit (softmax x V over retained keys, tiled).
//
// Consumes, window by window, the Retained Key Board of the QK unit (per row:
// which window positions survived filtering and their exact scores) and
// accumulates the attention output with an online (tiled) softmax, so the
// full score row is never needed at once:
//   for each tile of 16 window positions that at least one row retained:
//     m_new[i] = max(m[i], max of row i's retained scores in the tile)
//     APM:  p[i][v] = exp(s[i][v] - m_new[i]), corr[i] = exp(m[i] - m_new[i])
//     O updating: l[i] = corr*l[i] + sum_v p[i][v];  O[i][:] = corr*O[i][:]
//     RARS orders the tile's needed V vectors; each is read once from the
//     value buffer into a local tile register
//     systolic array: O[i][16c .. 16c+15] += sum_k p[i][v_k] * V[v_k][...]
//     for the 4 column slices c of the 64-element head dimension
//   finally (fin_start): out[i][d] = O[i][d] / l[i], one element per cycle.
// This is the ISTA procedure (lines 8-13 of the published algorithm) with its
// units: APM, 8x16 output-stationary array, RARS, O updating. The tile
// definition (16 consecutive window positions, skipped when none is
// retained), the serial order QK-then-V instead of the published staggered
// pipeline, the fixed-point formats (p UQ0.8, corr UQ1.8, O and l scaled by
// 256, out Q8.8) and the serial divider are this design's choices.
//
// Interface: pass_clear resets m, l and O for a new set of queries;
// win_start/win_base/win_len process one window, busy falls when done;
// fin_start computes out[][] (busy until done). vb_* is the value-buffer read
// port (1-cycle latency). ret_valid is the QK unit's retained-key board;
// the scores of tile ret_tile (positions TILE*ret_tile ..) arrive on
// ret_score in the same cycle, so TILE must equal the QK unit's lane count. cnt_* count tiles, skipped tiles, V loads, rows
// whose maximum rose (max updates) and RARS rounds.
module vpu
  import pade_pkg::*;
#(
  parameter int unsigned NR    = ROWS,
  parameter int unsigned NC    = 16,
  parameter int unsigned TILE  = LANES,
  parameter int unsigned WIN   = 1 << TOK_W,
  parameter int unsigned VAW   = 12,
  parameter int unsigned BASEW = 12,
  parameter int unsigned RCAP  = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic [15:0]            exp_scale,
  input  logic                   pass_clear,
  input  logic                   win_start,
  input  logic [BASEW-1:0]       win_base,
  input  logic [TOK_W:0]         win_len,
  input  logic                   fin_start,
  output logic                   busy,
  input  logic                   ret_valid [NR][WIN],
  output logic [$clog2(WIN/TILE)-1:0] ret_tile,
  input  score_t                 ret_score [NR][TILE],
  output logic                   vb_rd_en,
  output logic [VAW-1:0]         vb_rd_addr,
  input  logic [DIM*KBITS-1:0]   vb_rd_data,
  output logic signed [15:0]     out_o [NR][DIM],
  output logic [31:0]            out_l [NR],
  output logic [31:0]            cnt_tiles,
  output logic [31:0]            cnt_skipped,
  output logic [31:0]            cnt_vloads,
  output logic [31:0]            cnt_max_upd,
  output logic [31:0]            cnt_rounds
);

  localparam int unsigned NT    = WIN / TILE;
  localparam int unsigned TW    = $clog2(NT+1);
  localparam int unsigned VW    = $clog2(TILE);
  localparam int unsigned NSL   = DIM / NC;            // column slices
  localparam int unsigned DRAIN = NR + NC + 1;

  typedef enum logic [3:0] {V_IDLE, V_TILE, V_UPD, V_FETCH, V_SACLR, V_SAFEED, V_SADRAIN, V_SAACC, V_DIV} state_e;
  state_e state_q;

  // running softmax state
  score_t               m_q   [NR];
  logic                 have_q[NR];
  logic [31:0]          l_q   [NR];
  logic signed [31:0]   o_q   [NR][DIM];

  logic [TW-1:0]        t_q, nt_q;
  logic [BASEW-1:0]     base_q;
  logic [TOK_W:0]       len_q;

  // ---------------- current tile view ----------------
  // scores of the current tile come from the retained key board's read port
  assign ret_tile = t_q[$clog2(WIN/TILE)-1:0];
  logic   tv     [NR][TILE];
  score_t ts     [NR][TILE];
  logic [NR-1:0] tmask [TILE];
  logic   row_any[NR];
  score_t m_new  [NR];
  logic   tile_any;
  always_comb begin
    tile_any = 1'b0;
    for (int v = 0; v < TILE; v++) tmask[v] = '0;
    for (int i = 0; i < NR; i++) begin
      row_any[i] = 1'b0;
      m_new[i]   = m_q[i];
      for (int v = 0; v < TILE; v++) begin
        int unsigned pos;
        pos = 32'(t_q) * TILE + v;
        tv[i][v] = (pos < 32'(len_q)) && ret_valid[i][pos % WIN];
        ts[i][v] = ret_score[i][v];
        tmask[v][i] = tv[i][v];
        if (tv[i][v]) begin
          if ((!have_q[i] && !row_any[i]) || ts[i][v] > m_new[i]) m_new[i] = ts[i][v];
          row_any[i] = 1'b1;
        end
      end
      tile_any |= row_any[i];
    end
  end

  // ---------------- APM ----------------
  logic       apm_en;
  logic [7:0] p_q   [NR][TILE];
  logic [8:0] corr  [NR];
  score_t     mnew_q[NR];
  logic       rany_q[NR];
  assign apm_en = (state_q == V_TILE) && (t_q < nt_q) && tile_any;

  apm #(.NR(NR), .NC(TILE)) u_apm (
    .clk, .rst_n, .en(apm_en), .exp_scale,
    .s_valid(tv), .s(ts), .m_new(m_new), .m_old(m_q), .have_old(have_q),
    .p(p_q), .corr(corr)
  );

  // ---------------- RARS ----------------
  logic           rs_valid, rs_ready, rs_done;
  logic [VW-1:0]  rs_vid;
  logic [7:0]     rs_round, rs_nrounds;
  logic [VW:0]    rs_issued;

  rars_scheduler #(.NR(NR), .NV(TILE), .CAP(RCAP)) u_rars (
    .clk, .rst_n, .load(apm_en), .masks(tmask),
    .out_valid(rs_valid), .out_ready(rs_ready), .out_vid(rs_vid), .out_round(rs_round),
    .done(rs_done), .n_rounds(rs_nrounds), .n_issued(rs_issued)
  );

  // ---------------- local V tile ----------------
  logic signed [7:0] vt  [TILE][DIM];
  logic [VW-1:0]     ord [TILE];
  logic [VW:0]       nk_q;             // vectors in the tile
  logic              rd_pend;
  logic [VW-1:0]     rd_vid;

  assign rs_ready   = (state_q == V_FETCH);
  assign vb_rd_en   = rs_valid && rs_ready;
  assign vb_rd_addr = VAW'(32'(base_q) + 32'(t_q) * TILE + 32'(rs_vid));

  // ---------------- systolic array ----------------
  logic [7:0]              sa_a [NR];
  logic signed [7:0]       sa_b [NC];
  logic signed [23:0]      sa_acc [NR][NC];
  logic                    sa_clear, sa_valid;
  logic [VW:0]             k_q;
  logic [$clog2(NSL)-1:0]  c_q;
  logic [$clog2(DRAIN+1)-1:0] dr_q;

  assign sa_clear = (state_q == V_SACLR);
  assign sa_valid = (state_q == V_SAFEED);
  always_comb begin
    for (int i = 0; i < NR; i++) sa_a[i] = p_q[i][ord[k_q[VW-1:0]]];
    for (int j = 0; j < NC; j++) sa_b[j] = vt[k_q[VW-1:0]][32'(c_q) * NC + j];
  end

  systolic_array #(.NR(NR), .NC(NC)) u_sa (
    .clk, .rst_n, .clear(sa_clear), .in_valid(sa_valid), .a_in(sa_a), .b_in(sa_b), .acc(sa_acc)
  );

  // ---------------- divider ----------------
  logic [$clog2(NR*DIM)-1:0] e_q;
  logic [ROW_W-1:0]          e_row;
  logic [$clog2(DIM)-1:0]    e_col;
  logic signed [47:0]        quo;
  assign e_row = e_q[$clog2(NR*DIM)-1 -: ROW_W];
  assign e_col = e_q[$clog2(DIM)-1:0];
  always_comb begin
    if (l_q[e_row] == 32'd0) quo = '0;
    else quo = ($signed(48'(o_q[e_row][e_col])) <<< 8) / $signed({16'd0, l_q[e_row]});
  end

  // rows whose running maximum rises in this tile
  logic [31:0] n_mu;
  always_comb begin
    n_mu = '0;
    for (int i = 0; i < NR; i++) n_mu += 32'(rany_q[i] && have_q[i] && (mnew_q[i] > m_q[i]));
  end

  // ---------------- control ----------------
  logic [31:0] c_tiles, c_skip, c_vl, c_mu, c_rnd;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= V_IDLE;
      t_q <= '0; nt_q <= '0; base_q <= '0; len_q <= '0;
      nk_q <= '0; rd_pend <= 1'b0; rd_vid <= '0; k_q <= '0; c_q <= '0; dr_q <= '0; e_q <= '0;
      c_tiles <= '0; c_skip <= '0; c_vl <= '0; c_mu <= '0; c_rnd <= '0;
      for (int i = 0; i < NR; i++) begin
        m_q[i] <= '0; have_q[i] <= 1'b0; l_q[i] <= '0; mnew_q[i] <= '0; rany_q[i] <= 1'b0;
        for (int d = 0; d < DIM; d++) begin o_q[i][d] <= '0; out_o[i][d] <= '0; end
      end
      for (int v = 0; v < TILE; v++) begin
        ord[v] <= '0;
        for (int d = 0; d < DIM; d++) vt[v][d] <= '0;
      end
    end else begin
      if (pass_clear) begin
        for (int i = 0; i < NR; i++) begin
          m_q[i] <= '0; have_q[i] <= 1'b0; l_q[i] <= '0;
          for (int d = 0; d < DIM; d++) o_q[i][d] <= '0;
        end
      end
      unique case (state_q)
        V_IDLE: begin
          if (win_start) begin
            base_q  <= win_base;
            len_q   <= win_len;
            t_q     <= '0;
            nt_q    <= TW'((32'(win_len) + TILE - 1) / TILE);
            state_q <= V_TILE;
          end else if (fin_start) begin
            e_q     <= '0;
            state_q <= V_DIV;
          end
        end
        V_TILE: begin
          if (t_q >= nt_q) begin
            state_q <= V_IDLE;
          end else if (!tile_any) begin
            t_q    <= t_q + 1'b1;
            c_skip <= c_skip + 1'b1;
          end else begin
            for (int i = 0; i < NR; i++) begin
              mnew_q[i] <= m_new[i];
              rany_q[i] <= row_any[i];
            end
            state_q <= V_UPD;
          end
        end
        V_UPD: begin
          // O updating: rescale by corr, add this tile's weight sum
          for (int i = 0; i < NR; i++) begin
            if (rany_q[i]) begin
              logic [31:0] psum;
              psum = '0;
              for (int v = 0; v < TILE; v++) psum += 32'(p_q[i][v]);
              l_q[i] <= 32'((41'(l_q[i]) * 41'(corr[i])) >> 8) + psum;
              for (int d = 0; d < DIM; d++)
                o_q[i][d] <= 32'(($signed(41'(o_q[i][d])) * $signed({32'd0, corr[i]})) >>> 8);
              m_q[i]    <= mnew_q[i];
              have_q[i] <= 1'b1;
            end
          end
          c_mu    <= c_mu + n_mu;
          nk_q    <= '0;
          state_q <= V_FETCH;
        end
        V_FETCH: begin
          rd_pend <= vb_rd_en;
          rd_vid  <= rs_vid;
          if (rd_pend) begin
            for (int d = 0; d < DIM; d++) vt[nk_q[VW-1:0]][d] <= $signed(vb_rd_data[d*KBITS +: KBITS]);
            ord[nk_q[VW-1:0]] <= rd_vid;
            nk_q <= nk_q + 1'b1;
            c_vl <= c_vl + 1'b1;
          end
          if (rs_done && !rd_pend && !vb_rd_en) begin
            c_rnd   <= c_rnd + 32'(rs_nrounds);
            c_q     <= '0;
            state_q <= V_SACLR;
          end
        end
        V_SACLR: begin
          k_q     <= '0;
          state_q <= V_SAFEED;
        end
        V_SAFEED: begin
          if (k_q + 1'b1 >= nk_q) begin
            dr_q    <= '0;
            state_q <= V_SADRAIN;
          end else begin
            k_q <= k_q + 1'b1;
          end
        end
        V_SADRAIN: begin
          dr_q <= dr_q + 1'b1;
          if (dr_q == ($clog2(DRAIN+1))'(DRAIN)) state_q <= V_SAACC;
        end
        V_SAACC: begin
          for (int i = 0; i < NR; i++)
            for (int j = 0; j < NC; j++)
              o_q[i][32'(c_q) * NC + j] <= o_q[i][32'(c_q) * NC + j] + 32'(sa_acc[i][j]);
          if (c_q == ($clog2(NSL))'(NSL-1)) begin
            t_q     <= t_q + 1'b1;
            c_tiles <= c_tiles + 1'b1;
            state_q <= V_TILE;
          end else begin
            c_q     <= c_q + 1'b1;
            state_q <= V_SACLR;
          end
        end
        V_DIV: begin
          out_o[e_row][e_col] <= 16'(quo);
          e_q <= e_q + 1'b1;
          if (e_q == ($clog2(NR*DIM))'(NR*DIM-1)) state_q <= V_IDLE;
        end
        default: state_q <= V_IDLE;
      endcase
    end
  end

  assign busy        = (state_q != V_IDLE);
  assign out_l       = l_q;
  assign cnt_tiles   = c_tiles;
  assign cnt_skipped = c_skip;
  assign cnt_vloads  = c_vl;
  assign cnt_max_upd = c_mu;
  assign cnt_rounds  = c_rnd;

endmodule
