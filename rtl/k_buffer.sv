// k_buffer: on-chip key buffer, stored bit plane by bit plane.
//
// Keys are kept in the bit-plane layout: the 64-bit row at address
// token*8 + r holds bit r (r = 0 is the MSB) of all 64 elements of one key,
// so a PE lane fetches exactly one plane of one key per request. The buffer
// is filled through a single write port (the DMA path from external memory)
// and read through NPORT independent plane-request ports, one per PE row.
// Every read returns after FETCH_LAT cycles together with the request's tag
// (lane, token, plane); FETCH_LAT stands for the tens of cycles a bit-plane
// fetch from the memory system costs, which the lanes' out-of-order
// execution is there to hide.
// Capacity follows the published 320 KB key/value buffer split evenly
// (160 KB = 20480 planes = 2560 keys); the split, the port structure and
// FETCH_LAT are this design's choices.
//
// Interface: wr_en/wr_addr/wr_data write one plane per cycle. rd_valid[p]
// with rd_addr[p] and rd_tag[p] starts a read on port p (always accepted);
// rsp_valid[p], rsp_data[p], rsp_tag[p] appear FETCH_LAT cycles later.
module k_buffer
  import pade_pkg::*;
#(
  parameter int unsigned ENTRIES   = 20480,
  parameter int unsigned NPORT     = ROWS,
  parameter int unsigned FETCH_LAT = 24,
  parameter int unsigned AW        = $clog2(ENTRIES)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [DIM-1:0]   wr_data,
  input  logic             rd_valid [NPORT],
  input  logic [AW-1:0]    rd_addr  [NPORT],
  input  plane_req_t       rd_tag   [NPORT],
  output logic             rsp_valid[NPORT],
  output logic [DIM-1:0]   rsp_data [NPORT],
  output plane_req_t       rsp_tag  [NPORT]
);

  logic [DIM-1:0] mem [ENTRIES];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  // read pipeline: stage 0 is the SRAM read, the rest delay the result
  logic           pv [NPORT][FETCH_LAT];
  logic [DIM-1:0] pd [NPORT][FETCH_LAT];
  plane_req_t     pt [NPORT][FETCH_LAT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int p = 0; p < NPORT; p++)
        for (int s = 0; s < FETCH_LAT; s++) begin
          pv[p][s] <= 1'b0;
          pt[p][s] <= '0;
        end
    end else begin
      for (int p = 0; p < NPORT; p++) begin
        pv[p][0] <= rd_valid[p];
        pt[p][0] <= rd_tag[p];
        for (int s = 1; s < FETCH_LAT; s++) begin
          pv[p][s] <= pv[p][s-1];
          pt[p][s] <= pt[p][s-1];
        end
      end
    end
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < NPORT; p++) begin
      pd[p][0] <= mem[rd_addr[p]];
      for (int s = 1; s < FETCH_LAT; s++) pd[p][s] <= pd[p][s-1];
    end
  end

  always_comb begin
    for (int p = 0; p < NPORT; p++) begin
      rsp_valid[p] = pv[p][FETCH_LAT-1];
      rsp_data[p]  = pd[p][FETCH_LAT-1];
      rsp_tag[p]   = pt[p][FETCH_LAT-1];
    end
  end

endmodule
