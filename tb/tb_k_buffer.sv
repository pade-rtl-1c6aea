// tb_k_buffer: fills a small key buffer through the write port, then issues
// random reads on all ports (several per cycle, back to back) and checks that
// every response carries the written plane and the request's tag exactly
// FETCH_LAT cycles after the request, and that no other responses appear.
module tb_k_buffer;
  import pade_pkg::*;
  localparam int ENTRIES = 1024, NPORT = ROWS, LAT = 24, AW = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic wr_en = 0;
  logic [AW-1:0] wr_addr;
  logic [DIM-1:0] wr_data;
  logic rd_valid [NPORT];
  logic [AW-1:0] rd_addr [NPORT];
  plane_req_t rd_tag [NPORT];
  logic rsp_valid [NPORT];
  logic [DIM-1:0] rsp_data [NPORT];
  plane_req_t rsp_tag [NPORT];

  k_buffer #(.ENTRIES(ENTRIES), .NPORT(NPORT), .FETCH_LAT(LAT), .AW(AW)) dut (.*);

  logic [DIM-1:0] mem [ENTRIES];
  // expected responses per port, indexed by due cycle
  int cyc = 0;
  logic [DIM-1:0] exp_d [NPORT][int];
  plane_req_t     exp_t [NPORT][int];
  always @(posedge clk) cyc <= cyc + 1;

  initial begin
    for (int p = 0; p < NPORT; p++) begin rd_valid[p] = 0; rd_addr[p] = 0; rd_tag[p] = '0; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int a = 0; a < ENTRIES; a++) begin
      @(negedge clk);
      mem[a] = {$urandom, $urandom};
      wr_en = 1; wr_addr = AW'(a); wr_data = mem[a];
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 600; n++) begin
      @(negedge clk);
      for (int p = 0; p < NPORT; p++) begin
        rd_valid[p] = (n < 500) && ($urandom % 3 != 0);
        rd_addr[p]  = AW'($urandom);
        rd_tag[p]   = plane_req_t'($urandom);
        if (rd_valid[p]) begin
          exp_d[p][cyc + LAT] = mem[rd_addr[p]];
          exp_t[p][cyc + LAT] = rd_tag[p];
        end
      end
      // cyc counts edges; a request seen at the next edge (cyc) returns LAT
      // edges later, observed after edge cyc+LAT
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  // compare just after each edge
  always @(posedge clk) begin
    #2;
    if (rst_n) for (int p = 0; p < NPORT; p++) begin
      bit due;
      due = exp_d[p].exists(cyc);
      checks++;
      if (rsp_valid[p] != due) begin
        failures++; $display("FAIL port %0d cycle %0d valid=%0d due=%0d", p, cyc, rsp_valid[p], due);
      end else if (due) begin
        checks++;
        if (rsp_data[p] != exp_d[p][cyc] || rsp_tag[p] != exp_t[p][cyc]) begin
          failures++; $display("FAIL data port %0d cycle %0d", p, cyc);
        end
      end
    end
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
