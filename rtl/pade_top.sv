// pade_top: predictor-free sparse attention accelerator (top level).
//
// Computes attention out_i = softmax(q_i K^T) V for 8 queries at a time over
// up to 2560 8-bit keys/values held on chip, skipping the keys that cannot
// matter without a separate sparsity predictor: keys are scored bit plane by
// bit plane (MSB first) and dropped as soon as their guaranteed upper bound
// falls below a threshold derived from the best guaranteed lower bound seen
// so far. The same partial sums that decide the pruning become the exact
// scores of the keys that survive, so prediction and execution are one stage.
//
// Blocks: q_buffer (32 KB), k_buffer (bit-plane layout, 160 KB), v_buffer
// (160 KB), qk_pu (8 rows x 16 bit-wise PE lanes with BUI-GF threshold
// modules), vpu (APM, RARS scheduler, 8x16 systolic array, online softmax),
// and the top scheduler & controller, the FSM below:
//   1. load the 8 queries q_base .. q_base+7 from the query buffer into the
//      QK unit (which builds their BUI tables and sub-group sums) and clear
//      the running softmax state;
//   2. for every window of up to 512 keys, in head-tail interleaved order
//      (first window, last window, second, second-to-last, ...), run the QK
//      unit on the window, then the V unit on the retained keys;
//   3. divide the accumulated outputs by the softmax sums; raise done.
// The block set follows the published architecture. Running QK and V one
// after the other (not as a staggered pipeline), the window size, the
// interleaving at window granularity and the DMA-style write ports that stand
// in for the memory controller are this design's choices.
//
// Interface: *_wr_* write the buffers (keys as bit planes at token*8+plane,
// plane 0 = MSB; values and queries as 64 bytes, element d in bits
// [8d+7:8d]). Configuration: alpha_q (alpha = alpha_q/256), radius (in raw
// score units), exp_scale (softmax input = score * exp_scale / 65536 in
// log2 units). start with q_base and n_keys begins a pass; busy is high until
// done pulses; out_o (Q8.8) and out_l stay valid until the next pass.
// cnt_* are event counters since reset.
module pade_top
  import pade_pkg::*;
#(
  parameter int unsigned K_ENTRIES = 20480,
  parameter int unsigned V_ENTRIES = 2560,
  parameter int unsigned Q_ENTRIES = 512,
  parameter int unsigned FETCH_LAT = 24,
  parameter int unsigned RCAP      = 4
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // buffer fill (DMA)
  input  logic                   q_wr_en,
  input  logic [8:0]             q_wr_addr,
  input  logic [DIM*KBITS-1:0]   q_wr_data,
  input  logic                   k_wr_en,
  input  logic [14:0]            k_wr_addr,
  input  logic [DIM-1:0]         k_wr_data,
  input  logic                   v_wr_en,
  input  logic [11:0]            v_wr_addr,
  input  logic [DIM*KBITS-1:0]   v_wr_data,
  // configuration
  input  logic [8:0]             alpha_q,
  input  score_t                 radius,
  input  logic [15:0]            exp_scale,
  // command
  input  logic                   start,
  input  logic [8:0]             q_base,
  input  logic [11:0]            n_keys,
  output logic                   busy,
  output logic                   done,
  // results
  output logic signed [15:0]     out_o [ROWS][DIM],
  output logic [31:0]            out_l [ROWS],
  // statistics
  output logic [31:0]            cnt_planes,
  output logic [31:0]            cnt_prune,
  output logic [31:0]            cnt_hit,
  output logic [31:0]            cnt_ooe,
  output logic [31:0]            cnt_retained,
  output logic [31:0]            cnt_sbfull,
  output logic [31:0]            cnt_arb_stall,
  output logic [31:0]            cnt_tiles,
  output logic [31:0]            cnt_skipped,
  output logic [31:0]            cnt_vloads,
  output logic [31:0]            cnt_max_upd,
  output logic [31:0]            cnt_rounds,
  output logic [31:0]            cnt_windows,
  output logic [31:0]            cnt_tail_jumps
);

  localparam int unsigned WIN = 1 << TOK_W;

  // ---------------- buffers ----------------
  logic                 qb_rd_en;
  logic [8:0]           qb_rd_addr;
  logic [DIM*KBITS-1:0] qb_rd_data;

  q_buffer #(.ENTRIES(Q_ENTRIES), .AW(9)) u_qbuf (
    .clk, .wr_en(q_wr_en), .wr_addr(q_wr_addr), .wr_data(q_wr_data),
    .rd_en(qb_rd_en), .rd_addr(qb_rd_addr), .rd_data(qb_rd_data)
  );

  logic           kb_rd_valid [ROWS];
  logic [14:0]    kb_rd_addr  [ROWS];
  plane_req_t     kb_rd_tag   [ROWS];
  logic           kb_rsp_valid[ROWS];
  logic [DIM-1:0] kb_rsp_data [ROWS];
  plane_req_t     kb_rsp_tag  [ROWS];

  k_buffer #(.ENTRIES(K_ENTRIES), .NPORT(ROWS), .FETCH_LAT(FETCH_LAT), .AW(15)) u_kbuf (
    .clk, .rst_n, .wr_en(k_wr_en), .wr_addr(k_wr_addr), .wr_data(k_wr_data),
    .rd_valid(kb_rd_valid), .rd_addr(kb_rd_addr), .rd_tag(kb_rd_tag),
    .rsp_valid(kb_rsp_valid), .rsp_data(kb_rsp_data), .rsp_tag(kb_rsp_tag)
  );

  logic                 vb_rd_en;
  logic [11:0]          vb_rd_addr;
  logic [DIM*KBITS-1:0] vb_rd_data;

  v_buffer #(.ENTRIES(V_ENTRIES), .AW(12)) u_vbuf (
    .clk, .wr_en(v_wr_en), .wr_addr(v_wr_addr), .wr_data(v_wr_data),
    .rd_en(vb_rd_en), .rd_addr(vb_rd_addr), .rd_data(vb_rd_data)
  );

  // ---------------- controller ----------------
  typedef enum logic [3:0] {T_IDLE, T_QLOAD, T_QWAIT, T_WSTART, T_QK, T_VSTART, T_V, T_FSTART, T_FIN} state_e;
  state_e state_q;

  logic [8:0]        qbase_q;
  logic [11:0]       nkeys_q;
  logic [3:0]        ld_q;           // query load counter
  logic              ld_v_q;         // query read in flight
  logic [ROW_W-1:0]  ld_row_q;
  logic [3:0]        wi_q, nwin_q;   // window sequence index, window count
  logic              wait_q;         // one-cycle guard after a start pulse
  logic [31:0]       c_win, c_jump;

  // head-tail interleaved window order
  logic [3:0]        w_sel;
  logic [11:0]       w_base;
  logic [TOK_W:0]    w_len;
  always_comb begin
    int unsigned rem;
    w_sel  = wi_q[0] ? (nwin_q - 4'd1 - (wi_q >> 1)) : (wi_q >> 1);
    w_base = 12'(32'(w_sel) * WIN);
    rem    = 32'(nkeys_q) - 32'(w_base);
    w_len  = (TOK_W+1)'((rem > WIN) ? WIN : rem);
  end

  logic q_load, pass_clear, win_start_qk, win_start_v, fin_start;
  logic qk_done, v_busy;

  assign qb_rd_en     = (state_q == T_QLOAD);
  assign qb_rd_addr   = qbase_q + 9'(ld_q);
  assign q_load       = ld_v_q;
  assign pass_clear   = ld_v_q && (ld_row_q == '0);
  assign win_start_qk = (state_q == T_WSTART);
  assign win_start_v  = (state_q == T_VSTART);
  assign fin_start    = (state_q == T_FSTART);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= T_IDLE;
      qbase_q <= '0; nkeys_q <= '0; ld_q <= '0; ld_v_q <= 1'b0; ld_row_q <= '0;
      wi_q <= '0; nwin_q <= '0; wait_q <= 1'b0; c_win <= '0; c_jump <= '0;
      done <= 1'b0;
    end else begin
      done     <= 1'b0;
      ld_v_q   <= qb_rd_en;
      ld_row_q <= ROW_W'(ld_q);
      wait_q   <= 1'b0;
      unique case (state_q)
        T_IDLE: if (start) begin
          qbase_q <= q_base;
          nkeys_q <= n_keys;
          nwin_q  <= 4'((32'(n_keys) + WIN - 1) / WIN);
          ld_q    <= '0;
          wi_q    <= '0;
          state_q <= T_QLOAD;
        end
        T_QLOAD: begin
          ld_q <= ld_q + 1'b1;
          if (ld_q == 4'(ROWS-1)) state_q <= T_QWAIT;
        end
        T_QWAIT: begin
          // last query is loaded now; its tables are stored next cycle
          if (!ld_v_q) state_q <= (nwin_q == 0) ? T_FSTART : T_WSTART;
        end
        T_WSTART: begin
          wait_q  <= 1'b1;
          state_q <= T_QK;
        end
        T_QK: if (!wait_q && qk_done) state_q <= T_VSTART;
        T_VSTART: begin
          wait_q  <= 1'b1;
          state_q <= T_V;
        end
        T_V: if (!wait_q && !v_busy) begin
          c_win <= c_win + 1'b1;
          if (wi_q[0]) c_jump <= c_jump + 1'b1;
          wi_q <= wi_q + 1'b1;
          state_q <= (wi_q + 4'd1 == nwin_q) ? T_FSTART : T_WSTART;
        end
        T_FSTART: begin
          wait_q  <= 1'b1;
          state_q <= T_FIN;
        end
        T_FIN: if (!wait_q && !v_busy) begin
          done    <= 1'b1;
          state_q <= T_IDLE;
        end
        default: state_q <= T_IDLE;
      endcase
    end
  end

  assign busy           = (state_q != T_IDLE);
  assign cnt_windows    = c_win;
  assign cnt_tail_jumps = c_jump;

  // ---------------- QK unit ----------------
  logic   ret_valid [ROWS][WIN];
  score_t ret_score [ROWS][LANES];
  logic [$clog2(WIN/LANES)-1:0] ret_tile;

  qk_pu #(.NROW(ROWS), .NLANE(LANES), .WIN(WIN), .KAW(15), .BASEW(12)) u_qk (
    .clk, .rst_n, .alpha_q, .radius,
    .q_load(q_load), .q_row(ld_row_q), .q_vec(qb_rd_data),
    .win_start(win_start_qk), .win_base(w_base), .win_len(w_len), .win_done(qk_done),
    .kb_rd_valid, .kb_rd_addr, .kb_rd_tag, .kb_rsp_valid, .kb_rsp_data, .kb_rsp_tag,
    .ret_valid, .ret_tile, .ret_score,
    .cnt_planes, .cnt_prune, .cnt_hit, .cnt_ooe, .cnt_retained, .cnt_sbfull, .cnt_arb_stall
  );

  // ---------------- V unit ----------------
  vpu #(.NR(ROWS), .NC(16), .TILE(LANES), .WIN(WIN), .VAW(12), .BASEW(12), .RCAP(RCAP)) u_v (
    .clk, .rst_n, .exp_scale, .pass_clear,
    .win_start(win_start_v), .win_base(w_base), .win_len(w_len), .fin_start, .busy(v_busy),
    .ret_valid, .ret_tile, .ret_score,
    .vb_rd_en, .vb_rd_addr, .vb_rd_data,
    .out_o, .out_l,
    .cnt_tiles, .cnt_skipped, .cnt_vloads, .cnt_max_upd, .cnt_rounds
  );

endmodule
