// q_buffer: on-chip query buffer.
//
// Holds 512 query vectors of 64 x 8 bit (32 KB, the published size), filled
// by the DMA write port. At the start of a pass the controller reads the 8
// queries of the pass one per cycle and hands them to the QK unit.
// The one-cycle synchronous read is this design's choice.
//
// Interface: wr_en/wr_addr/wr_data write one vector; rd_en/rd_addr read one,
// rd_data is valid the cycle after rd_en (latency 1).
module q_buffer
  import pade_pkg::*;
#(
  parameter int unsigned ENTRIES = 512,
  parameter int unsigned AW      = $clog2(ENTRIES)
) (
  input  logic                 clk,
  input  logic                 wr_en,
  input  logic [AW-1:0]        wr_addr,
  input  logic [DIM*KBITS-1:0] wr_data,
  input  logic                 rd_en,
  input  logic [AW-1:0]        rd_addr,
  output logic [DIM*KBITS-1:0] rd_data
);

  logic [DIM*KBITS-1:0] mem [ENTRIES];

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= mem[rd_addr];
  end

endmodule
