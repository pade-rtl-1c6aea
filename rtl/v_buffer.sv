// v_buffer: on-chip value buffer.
//
// Holds one 64 x 8-bit value vector per token in the element-wise layout
// (each row is a whole vector, bytes in hidden-dimension order), filled by
// the DMA write port and read by the V unit one vector per cycle. Capacity is
// the value half of the published 320 KB key/value buffer (160 KB = 2560
// vectors); the even split and the one-cycle read are this design's choices.
//
// Interface: wr_en/wr_addr/wr_data write one vector; rd_en/rd_addr read one,
// rd_data is valid the cycle after rd_en (latency 1).
module v_buffer
  import pade_pkg::*;
#(
  parameter int unsigned ENTRIES = 2560,
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
