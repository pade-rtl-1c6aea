// tb_rars_scheduler: first the published example (4 score rows, 8 values,
// 2 values per row per round; S0 needs V0-V3, S1 and S3 need V2,V3,V4,V7,
// S2 needs V4-V7): RARS must issue {V2,V3,V5,V6} in round 0 and
// {V0,V1,V4,V7} in round 1, 8 loads in total. Then random masks on the
// default 8 x 16 configuration with a randomly stalling consumer: every V
// with a non-zero mask is delivered exactly once, no V with an all-zero mask
// is delivered, rounds never decrease, no row takes more than CAP Vs in a
// round, the round count is at least the lower bound max_row_load / CAP, and
// n_issued / n_rounds agree with what was delivered.
module tb_rars_scheduler;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  // ---- published example ----
  logic        e_load = 0, e_valid, e_ready = 1, e_done;
  logic [3:0]  e_masks [8];
  logic [2:0]  e_vid;
  logic [7:0]  e_round, e_nr;
  logic [3:0]  e_ni;
  rars_scheduler #(.NR(4), .NV(8), .CAP(2)) u_ex (
    .clk, .rst_n, .load(e_load), .masks(e_masks), .out_valid(e_valid), .out_ready(e_ready),
    .out_vid(e_vid), .out_round(e_round), .done(e_done), .n_rounds(e_nr), .n_issued(e_ni)
  );

  // ---- default configuration ----
  localparam int NR = 8, NV = 16, CAP = 4;
  logic          load = 0, valid, ready = 0, done;
  logic [NR-1:0] masks [NV];
  logic [3:0]    vid;
  logic [7:0]    round, nr;
  logic [4:0]    ni;
  rars_scheduler #(.NR(NR), .NV(NV), .CAP(CAP)) u_def (
    .clk, .rst_n, .load, .masks, .out_valid(valid), .out_ready(ready),
    .out_vid(vid), .out_round(round), .done, .n_rounds(nr), .n_issued(ni)
  );

  function automatic logic [3:0] rows(input int r0, r1, r2, r3);
    logic [3:0] m;
    m = '0;
    if (r0 >= 0) m[r0] = 1'b1;
    if (r1 >= 0) m[r1] = 1'b1;
    if (r2 >= 0) m[r2] = 1'b1;
    if (r3 >= 0) m[r3] = 1'b1;
    return m;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    // value -> rows that need it
    e_masks[0] = rows(0, -1, -1, -1);
    e_masks[1] = rows(0, -1, -1, -1);
    e_masks[2] = rows(0, 1, 3, -1);
    e_masks[3] = rows(0, 1, 3, -1);
    e_masks[4] = rows(1, 2, 3, -1);
    e_masks[5] = rows(2, -1, -1, -1);
    e_masks[6] = rows(2, -1, -1, -1);
    e_masks[7] = rows(1, 2, 3, -1);
    @(negedge clk); e_load = 1;
    @(negedge clk); e_load = 0;
    begin
      int got [8];
      int n;
      n = 0;
      for (int i = 0; i < 8; i++) got[i] = -1;
      while (!(e_done && !e_valid)) begin
        @(posedge clk);
        if (e_valid && e_ready) begin got[e_vid] = int'(e_round); n++; end
        #1;
      end
      checks += 4;
      if (n != 8 || e_ni != 4'd8) begin failures++; $display("FAIL example loads %0d/%0d", n, e_ni); end
      if (e_nr != 8'd2) begin failures++; $display("FAIL example rounds %0d", e_nr); end
      if (!(got[2] == 0 && got[3] == 0 && got[5] == 0 && got[6] == 0)) begin
        failures++; $display("FAIL example round 0: %p", got);
      end
      if (!(got[0] == 1 && got[1] == 1 && got[4] == 1 && got[7] == 1)) begin
        failures++; $display("FAIL example round 1: %p", got);
      end
    end

    // random schedules
    for (int t = 0; t < 300; t++) begin
      int seen [NV];
      int per_row [NR];
      int row_load [NR];
      int cur_round, n, need, lb;
      @(negedge clk);
      need = 0;
      for (int r = 0; r < NR; r++) row_load[r] = 0;
      for (int v = 0; v < NV; v++) begin
        masks[v] = ($urandom % 5 == 0) ? '0 : NR'($urandom & $urandom);
        seen[v] = 0;
        if (masks[v] != '0) need++;
        for (int r = 0; r < NR; r++) row_load[r] += int'(masks[v][r]);
      end
      lb = 0;
      for (int r = 0; r < NR; r++) if ((row_load[r] + CAP - 1) / CAP > lb) lb = (row_load[r] + CAP - 1) / CAP;
      load = 1;
      @(negedge clk); load = 0;
      for (int r = 0; r < NR; r++) per_row[r] = 0;
      cur_round = 0; n = 0;
      while (!(done && !valid)) begin
        ready = ($urandom % 3 != 0);
        @(posedge clk);
        if (valid && ready) begin
          n++;
          checks++;
          if (masks[vid] == '0 || seen[vid] != 0 || int'(round) < cur_round) begin
            failures++; $display("FAIL t=%0d vid=%0d round=%0d", t, vid, round);
          end
          seen[vid]++;
          if (int'(round) != cur_round) begin
            cur_round = int'(round);
            for (int r = 0; r < NR; r++) per_row[r] = 0;
          end
          for (int r = 0; r < NR; r++) if (masks[vid][r]) per_row[r]++;
          for (int r = 0; r < NR; r++) if (per_row[r] > CAP) begin
            failures++; $display("FAIL t=%0d row %0d over capacity", t, r);
          end
        end
        #1;
      end
      ready = 0;
      checks += 3;
      if (n != need || int'(ni) != need) begin failures++; $display("FAIL t=%0d count %0d/%0d/%0d", t, n, ni, need); end
      if (int'(nr) < lb) begin failures++; $display("FAIL t=%0d rounds %0d < %0d", t, nr, lb); end
      if (need > 0 && int'(nr) != cur_round + 1) begin failures++; $display("FAIL t=%0d n_rounds", t); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
