// rars_scheduler: reuse-aware reorder scheduler (RARS) of the V unit.
//
// After sparse filtering, each value vector V_v of a tile is needed by a set
// of score rows, described by an NR-bit row mask. Loading the Vs in plain
// index order makes rows that share a V fetch it in different rounds. RARS
// orders the loads greedily so that heavily shared Vs go first:
//   1. Build: for every V with a non-zero mask, its ID is added to the ID
//      buffer entry addressed by its mask (one write per cycle; each entry
//      holds its IDs as an NV-bit set).
//   2. Issue, round by round: masks are visited from the most shared (most
//      rows) to the least; a V of the visited mask is issued to the issuing
//      FIFO if every row in its mask still has capacity in this round (each
//      row takes at most CAP Vs per round), and those rows' capacities drop by
//      one. When no visited mask can issue anything, the round ends, the
//      capacities are restored and the next round starts, until every V is
//      issued.
// With the published example (4 rows, 8 Vs, 2 Vs per row per round) this
// issues {V2,V3,V5,V6} in round 0 and {V0,V1,V4,V7} in round 1, 8 loads
// instead of 11. The ID buffer indexed by mask, the FSM and the issuing FIFO
// follow the published scheduler; the order among equally shared masks
// (increasing mask value), one candidate per cycle and the bit-set encoding
// of buffer entries are this design's choices.
//
// Interface: load with masks[] (sampled in that cycle) starts a schedule.
// out_valid/out_ready/out_vid/out_round deliver the issue order; done is
// high when idle and everything was delivered. n_issued counts loads.
module rars_scheduler #(
  parameter int unsigned NR  = 8,
  parameter int unsigned NV  = 16,
  parameter int unsigned CAP = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  load,
  input  logic [NR-1:0]         masks [NV],
  output logic                  out_valid,
  input  logic                  out_ready,
  output logic [$clog2(NV)-1:0] out_vid,
  output logic [7:0]            out_round,
  output logic                  done,
  output logic [7:0]            n_rounds,
  output logic [$clog2(NV+1)-1:0] n_issued
);

  localparam int unsigned NM = 1 << NR;      // ID buffer entries
  localparam int unsigned VW = $clog2(NV);
  localparam int unsigned CW = $clog2(CAP+1);

  typedef logic [NR-1:0] mask_t;
  typedef mask_t order_t [NM];

  // Visiting order: decreasing popcount, ties by increasing mask value.
  // Entry NM-1 (last) is mask 0, which is never used.
  function automatic order_t make_order();
    order_t o;
    int unsigned n;
    n = 0;
    for (int pc = NR; pc >= 0; pc--)
      for (int m = 0; m < NM; m++)
        if ($countones(m) == pc) begin
          o[n] = mask_t'(m);
          n++;
        end
    return o;
  endfunction
  localparam order_t ORDER = make_order();

  typedef enum logic [1:0] {R_IDLE, R_BUILD, R_ISSUE, R_DRAIN} state_e;
  state_e state_q;

  logic [NV-1:0]  idbuf [NM];      // ID buffer, indexed by row mask
  logic [NR-1:0]  msk_q [NV];
  logic [VW:0]    bidx_q;          // build index
  logic [CW-1:0]  cap_q [NR];
  logic [7:0]     round_q;
  logic [VW:0]    issued_q, total_q;

  // issuing FIFO
  logic [VW-1:0]  ff_vid [NV];
  logic [7:0]     ff_rnd [NV];
  logic [VW-1:0]  ff_wp, ff_rp;
  logic [VW:0]    ff_cnt;

  // candidate search: first mask in ORDER whose entry is non-empty and fits
  // (none of its rows has run out of capacity), then its lowest V id
  logic           cand_v, any_left;
  mask_t          cand_m, zero_cap;
  logic [VW-1:0]  cand_vid;
  always_comb begin
    for (int r = 0; r < NR; r++) zero_cap[r] = (cap_q[r] == '0);
    cand_v   = 1'b0;
    cand_m   = '0;
    any_left = 1'b0;
    for (int p = NM-1; p >= 0; p--) begin
      if (ORDER[p] != '0 && idbuf[ORDER[p]] != '0) begin
        any_left = 1'b1;
        if ((ORDER[p] & zero_cap) == '0) begin
          cand_v = 1'b1;
          cand_m = ORDER[p];
        end
      end
    end
    cand_vid = '0;
    for (int v = NV-1; v >= 0; v--) if (idbuf[cand_m][v]) cand_vid = VW'(v);
  end

  logic issue, pop;
  assign issue = (state_q == R_ISSUE) && cand_v;
  assign pop   = out_valid && out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= R_IDLE;
      for (int m = 0; m < NM; m++) idbuf[m] <= '0;
      for (int v = 0; v < NV; v++) begin msk_q[v] <= '0; ff_vid[v] <= '0; ff_rnd[v] <= '0; end
      for (int r = 0; r < NR; r++) cap_q[r] <= '0;
      bidx_q <= '0; round_q <= '0; issued_q <= '0; total_q <= '0;
      ff_wp <= '0; ff_rp <= '0; ff_cnt <= '0;
    end else begin
      unique case (state_q)
        R_IDLE, R_DRAIN: begin
          if (load) begin
            for (int v = 0; v < NV; v++) msk_q[v] <= masks[v];
            for (int m = 0; m < NM; m++) idbuf[m] <= '0;
            bidx_q   <= '0;
            round_q  <= '0;
            issued_q <= '0;
            total_q  <= '0;
            ff_wp <= '0; ff_rp <= '0; ff_cnt <= '0;
            state_q  <= R_BUILD;
          end else if (state_q == R_DRAIN && ff_cnt == '0) begin
            state_q <= R_IDLE;
          end
        end
        R_BUILD: begin
          // one ID-buffer write per cycle
          if (msk_q[bidx_q[VW-1:0]] != '0) begin
            idbuf[msk_q[bidx_q[VW-1:0]]][bidx_q[VW-1:0]] <= 1'b1;
            total_q <= total_q + 1'b1;
          end
          if (bidx_q == (VW+1)'(NV-1)) begin
            state_q <= R_ISSUE;
            for (int r = 0; r < NR; r++) cap_q[r] <= CW'(CAP);
          end
          bidx_q <= bidx_q + 1'b1;
        end
        R_ISSUE: begin
          if (cand_v) begin
            idbuf[cand_m][cand_vid] <= 1'b0;
            for (int r = 0; r < NR; r++) if (cand_m[r]) cap_q[r] <= cap_q[r] - 1'b1;
            issued_q <= issued_q + 1'b1;
          end else if (any_left) begin
            // round closed: restore capacities
            round_q <= round_q + 1'b1;
            for (int r = 0; r < NR; r++) cap_q[r] <= CW'(CAP);
          end else begin
            state_q <= R_DRAIN;
          end
        end
        default: state_q <= R_IDLE;
      endcase

      if (state_q != R_IDLE && !(load && state_q == R_DRAIN)) begin
        if (issue) begin
          ff_vid[ff_wp] <= cand_vid;
          ff_rnd[ff_wp] <= round_q;
          ff_wp <= (ff_wp == VW'(NV-1)) ? '0 : ff_wp + 1'b1;
        end
        if (pop) ff_rp <= (ff_rp == VW'(NV-1)) ? '0 : ff_rp + 1'b1;
        ff_cnt <= ff_cnt + (VW+1)'(issue) - (VW+1)'(pop);
      end
    end
  end

  assign out_valid = (ff_cnt != '0);
  assign out_vid   = ff_vid[ff_rp];
  assign out_round = ff_rnd[ff_rp];
  assign done      = (state_q == R_IDLE);
  assign n_rounds  = (issued_q == '0) ? 8'd0 : round_q + 8'd1;
  assign n_issued  = issued_q;

  // the FIFO holds at most NV entries (each V is issued once per schedule)
  always_ff @(posedge clk) begin
    if (rst_n) assert (ff_cnt <= (VW+1)'(NV)) else $error("rars_scheduler: FIFO overflow");
  end

endmodule
