// bs_scheduler: bidirectional-sparsity (BS) scheduler of one PE lane.
//
// Turns one 64-bit key bit plane into the control of the lane's grouped
// ANDer tree. The plane is cut into 8 sub-groups of 8 bits. For each
// sub-group the scheduler first chooses the bit pattern: if more than half of
// the bits are 1 (popcount > N/2) it flips the sub-group (0-mode) so that at
// most 4 bits remain set; the ANDer tree then subtracts the selected query
// elements from the sub-group query sum. Then one priority encoder per
// sub-group is reused over 4 time steps: at step t it looks at the 5-bit
// window {k_t .. k_t+4}, reports the offset Id_t of the first remaining 1 and
// V_t = 1, and masks that bit; if the window is empty it reports V_t = 0.
// Since every earlier position has already been consumed when step t starts,
// and at most 4 bits are set, the 4 steps always pick every set bit.
// This follows the published scheduler (mode selection by bit count against
// N/2, a priority encoder reused across time steps over sliding 5-bit
// windows). Encoding Id as the offset inside the window and the valid/ready
// handshake are this design's choices.
//
// Interface: in_valid/in_ready accept a plane_rsp_t (token, plane index and
// bits); out_valid/out_ready deliver the same tag with the bs_sel_t result.
// Timing: a plane accepted at edge n is presented from edge n+4 (4 encoder
// steps); a new plane is accepted in the cycle the result is taken, so the
// throughput is one plane per 5 cycles.
module bs_scheduler
  import pade_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid,
  output logic       in_ready,
  input  plane_rsp_t in_rsp,
  output logic       out_valid,
  input  logic       out_ready,
  output plane_rsp_t out_rsp,
  output bs_sel_t    out_sel
);

  typedef enum logic [1:0] {S_IDLE, S_BUSY, S_DONE} state_e;
  state_e state_q;
  logic [1:0] step_q;
  logic [NGROUP-1:0][GROUP-1:0] rem_q;
  plane_rsp_t rsp_q;
  bs_sel_t    sel_q;

  assign in_ready  = (state_q == S_IDLE) || (state_q == S_DONE && out_ready);
  assign out_valid = (state_q == S_DONE);
  assign out_rsp   = rsp_q;
  assign out_sel   = sel_q;

  // Bit pattern selection: count ones of each sub-group, flip if > N/2.
  logic [NGROUP-1:0]            mode_d;
  logic [NGROUP-1:0][GROUP-1:0] pat_d;
  always_comb begin
    for (int g = 0; g < NGROUP; g++) begin
      int unsigned cnt;
      cnt = 0;
      for (int b = 0; b < GROUP; b++) cnt += int'(in_rsp.bits[g*GROUP+b]);
      mode_d[g] = (cnt > GROUP/2);
      pat_d[g]  = mode_d[g] ? ~in_rsp.bits[g*GROUP +: GROUP] : in_rsp.bits[g*GROUP +: GROUP];
    end
  end

  // One priority encoder per sub-group on the current 5-bit window.
  logic [NGROUP-1:0][2:0]       pe_id;
  logic [NGROUP-1:0]            pe_v;
  logic [NGROUP-1:0][GROUP-1:0] rem_next;
  always_comb begin
    for (int g = 0; g < NGROUP; g++) begin
      logic [4:0] win;
      win = rem_q[g][{1'b0, step_q} +: 5];
      pe_id[g] = 3'd0;
      pe_v[g]  = 1'b0;
      for (int b = 4; b >= 0; b--) begin
        if (win[b]) begin
          pe_id[g] = 3'(b);
          pe_v[g]  = 1'b1;
        end
      end
      rem_next[g] = rem_q[g];
      if (pe_v[g]) rem_next[g][32'(step_q) + 32'(pe_id[g])] = 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      step_q  <= '0;
      rem_q   <= '0;
      rsp_q   <= '0;
      sel_q   <= '0;
    end else begin
      unique case (state_q)
        S_IDLE, S_DONE: begin
          if (in_valid && in_ready) begin
            state_q    <= S_BUSY;
            step_q     <= '0;
            rem_q      <= pat_d;
            rsp_q      <= in_rsp;
            sel_q.mode <= mode_d;
            sel_q.v    <= '0;
            sel_q.id   <= '0;
          end else if (state_q == S_DONE && out_ready) begin
            state_q <= S_IDLE;
          end
        end
        S_BUSY: begin
          for (int g = 0; g < NGROUP; g++) begin
            sel_q.v [g*SLOTS + 32'(step_q)] <= pe_v[g];
            sel_q.id[g*SLOTS + 32'(step_q)] <= pe_id[g];
          end
          rem_q  <= rem_next;
          step_q <= step_q + 2'd1;
          if (step_q == 2'(SLOTS-1)) state_q <= S_DONE;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // After the 4 steps no set bit may remain (BS bounds ones to <= 4 per group).
  always_ff @(posedge clk) begin
    if (rst_n && state_q == S_BUSY && step_q == 2'(SLOTS-1))
      assert (rem_next == '0) else $error("bs_scheduler: unselected bit left");
  end

endmodule
