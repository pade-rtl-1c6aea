// pade_pkg: constants, types and arithmetic helpers shared by the PADE RTL.
//
// The accelerator computes sparse attention for 8 queries at a time over
// 8-bit keys that are processed one bit plane per step (MSB first). The
// sizes below are the published configuration: 64-element head dimension,
// 8-bit operands, a QK unit of 8 rows x 16 bit-wise PE lanes, sub-groups of 8
// elements inside each lane's ANDer tree (four 5:1 muxes per sub-group), a
// 32-entry scoreboard per lane and an 8x16 systolic array in the V unit.
// TOK_W (9 bit token index) is this design's reading of the 45-bit
// scoreboard entry: 1 valid + 9 token + 3 bit index + 32 partial score.
//
// exp2q() is the fixed-point exponential of the auxiliary processing module.
// It is this design's own choice (the published unit is FP16): the input is a
// non-negative score gap d, scaled to 1/16 steps of log2 by exp_scale/4096,
// and the result is round(256 * 2^-x) taken from a 16-entry fraction table
// LUT[f] = round(256 * 2^(-f/16)) shifted right by the integer part.
package pade_pkg;

  localparam int unsigned DIM        = 64;   // head dimension
  localparam int unsigned KBITS      = 8;    // key / query precision
  localparam int unsigned ROWS       = 8;    // queries in flight (PE rows)
  localparam int unsigned LANES      = 16;   // bit-wise PE lanes per row
  localparam int unsigned GROUP      = 8;    // ANDer tree sub-group size
  localparam int unsigned NGROUP     = DIM / GROUP;
  localparam int unsigned SLOTS      = GROUP / 2;  // 5:1 muxes per sub-group
  localparam int unsigned NSEL       = NGROUP * SLOTS;
  localparam int unsigned SB_ENTRIES = 32;   // scoreboard entries per lane
  localparam int unsigned TOK_W      = 9;    // token index inside a window
  localparam int unsigned PSUM_W     = 32;   // partial score register
  localparam int unsigned QSUM_W     = 12;   // sum of 8 signed 8-bit values
  localparam int unsigned DOT_W      = 16;   // sum of 64 signed 8-bit values
  localparam int unsigned LANE_W     = $clog2(LANES);
  localparam int unsigned ROW_W      = $clog2(ROWS);

  typedef logic signed [KBITS-1:0]  q_t;
  typedef logic signed [PSUM_W-1:0] score_t;

  // Output of the bidirectional-sparsity scheduler for one 64-bit key plane.
  // For sub-group g and time step t (slot g*SLOTS+t): v = a query element is
  // selected, id = its offset inside the window {q[8g+t] .. q[8g+t+4]}.
  // mode[g] = 1 when the sub-group was flipped (0-mode): the tree then
  // subtracts the selected elements from the sub-group sum.
  typedef struct packed {
    logic [NGROUP-1:0]          mode;
    logic [NSEL-1:0]            v;
    logic [NSEL-1:0][2:0]       id;
  } bs_sel_t;

  // One key-plane request of a PE lane.
  typedef struct packed {
    logic [LANE_W-1:0] lane;
    logic [TOK_W-1:0]  tok;
    logic [2:0]        plane;   // 0 = MSB
  } plane_req_t;

  // One bit-plane result travelling back to a lane.
  typedef struct packed {
    logic [TOK_W-1:0]  tok;
    logic [2:0]        plane;
    logic [DIM-1:0]    bits;
  } plane_rsp_t;

  // 2^-(x/16) * 256 for the fraction x[3:0]; index 0 gives 256.
  function automatic logic [8:0] exp2_frac(input logic [3:0] f);
    unique case (f)
      4'd0:  return 9'd256;  4'd1:  return 9'd245;  4'd2:  return 9'd235;  4'd3:  return 9'd225;
      4'd4:  return 9'd215;  4'd5:  return 9'd206;  4'd6:  return 9'd197;  4'd7:  return 9'd189;
      4'd8:  return 9'd181;  4'd9:  return 9'd173;  4'd10: return 9'd166;  4'd11: return 9'd159;
      4'd12: return 9'd152;  4'd13: return 9'd146;  4'd14: return 9'd140;  default: return 9'd134;
    endcase
  endfunction

  // exp(-d * exp_scale / 4096 * ln2 / 16 * 16) in UQ1.8: 256 means 1.0.
  // d must be >= 0 (callers pass max - score).
  function automatic logic [8:0] exp2q(input logic [PSUM_W-1:0] d, input logic [15:0] exp_scale);
    logic [47:0] x;
    x = ({16'd0, d} * {32'd0, exp_scale}) >> 12;   // log2 units of 1/16
    if (x[47:4] > 44'd8) return 9'd0;
    return exp2_frac(x[3:0]) >> x[7:4];
  endfunction

endpackage
