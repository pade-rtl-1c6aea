// tb_v_buffer: writes random 512-bit vectors to every entry of the
// v_buffer at its default size, reads them back in random order and checks
// that data appears one cycle after rd_en, that rd_data holds while rd_en is
// low, and that a write followed by a read of the same address returns the
// new data.
module tb_v_buffer;
  import pade_pkg::*;
  localparam int ENTRIES = 2560, AW = 12;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en = 0, rd_en = 0;
  logic [AW-1:0] wr_addr = 0, rd_addr = 0;
  logic [DIM*KBITS-1:0] wr_data = 0, rd_data;

  v_buffer #(.ENTRIES(ENTRIES), .AW(AW)) dut (.*);

  logic [DIM*KBITS-1:0] mem [ENTRIES];

  function automatic logic [DIM*KBITS-1:0] rnd();
    logic [DIM*KBITS-1:0] v;
    for (int i = 0; i < DIM*KBITS/32; i++) v[i*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    for (int a = 0; a < ENTRIES; a++) begin
      @(negedge clk);
      mem[a] = rnd();
      wr_en = 1; wr_addr = AW'(a); wr_data = mem[a];
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 3000; n++) begin
      int a;
      logic [DIM*KBITS-1:0] held;
      a = int'($urandom % ENTRIES);
      @(negedge clk);
      if (n % 5 == 0) begin
        // overwrite then read the same address
        mem[a] = rnd();
        wr_en = 1; wr_addr = AW'(a); wr_data = mem[a];
        @(negedge clk); wr_en = 0;
      end
      rd_en = 1; rd_addr = AW'(a);
      @(negedge clk);
      rd_en = 0;
      checks++;
      if (rd_data !== mem[a]) begin failures++; $display("FAIL read addr %0d", a); end
      held = rd_data;
      rd_addr = AW'($urandom % ENTRIES);
      @(negedge clk);
      checks++;
      if (rd_data !== held) begin failures++; $display("FAIL hold"); end
    end
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
