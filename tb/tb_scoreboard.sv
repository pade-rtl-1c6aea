// tb_scoreboard: random update / allocate / evict / clear traffic against a
// reference map kept here. After every write it checks, for a random token and
// for the token just written, that lookup returns the model's hit, partial
// score and bit index in the same cycle (combinational lookup), and that
// used / full match the model's occupancy. Tokens are drawn from a small
// range so that hits, evictions and a full table all happen.
module tb_scoreboard;
  import pade_pkg::*;
  localparam int unsigned ENTRIES = SB_ENTRIES;
  logic clk = 0, rst_n = 0, clear = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic [TOK_W-1:0] lk_tok, wr_tok;
  logic lk_hit, wr_en = 0, wr_evict = 0, full;
  score_t lk_psum, wr_psum;
  logic [2:0] lk_bit, wr_bit;
  logic [$clog2(ENTRIES+1)-1:0] used;

  scoreboard #(.ENTRIES(ENTRIES)) dut (.*);

  score_t  m_psum [int];
  int      m_bit  [int];
  int      n_full = 0;

  task automatic check_tok(input int t);
    lk_tok = TOK_W'(t);
    #1;
    checks++;
    if (lk_hit != m_psum.exists(t)) begin
      failures++; $display("FAIL hit tok=%0d dut=%0d", t, lk_hit);
    end else if (lk_hit) begin
      checks++;
      if (lk_psum != m_psum[t] || int'(lk_bit) != m_bit[t]) begin
        failures++; $display("FAIL data tok=%0d %0d/%0d vs %0d/%0d", t, lk_psum, lk_bit, m_psum[t], m_bit[t]);
      end
    end
  endtask

  initial begin
    lk_tok = 0; wr_tok = 0; wr_psum = 0; wr_bit = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 6000; n++) begin
      int t, op;
      @(negedge clk);
      t  = (n < 3000) ? int'($urandom % 48) : int'($urandom % 512);
      op = int'($urandom % 10);
      wr_en = 0; wr_evict = 0; clear = 0;
      if (n % 1500 == 1499) begin
        clear = 1;
      end else if (op < 2) begin
        wr_en = 1; wr_evict = 1; wr_tok = TOK_W'(t);
      end else if (op < 9) begin
        if (m_psum.exists(t) || m_psum.num() < ENTRIES) begin
          wr_en = 1; wr_tok = TOK_W'(t);
          wr_psum = score_t'($urandom); wr_bit = 3'($urandom);
        end
      end
      @(posedge clk); #1;
      if (clear) begin m_psum.delete(); m_bit.delete(); end
      else if (wr_en && wr_evict) begin
        if (m_psum.exists(t)) begin m_psum.delete(t); m_bit.delete(t); end
      end else if (wr_en) begin
        m_psum[t] = wr_psum; m_bit[t] = int'(wr_bit);
      end
      wr_en = 0; clear = 0;
      check_tok(t);
      check_tok(int'($urandom % 48));
      checks += 2;
      if (int'(used) != m_psum.num()) begin failures++; $display("FAIL used %0d vs %0d", used, m_psum.num()); end
      if (full != (m_psum.num() == ENTRIES)) begin failures++; $display("FAIL full"); end
      if (full) n_full++;
    end
    checks++;
    if (n_full == 0) begin failures++; $display("FAIL table never became full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
