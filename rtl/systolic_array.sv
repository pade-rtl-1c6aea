// systolic_array: 8 x 16 output-stationary INT8 systolic array of the V unit.
//
// Computes C = A x B for A (8 x K, unsigned 8-bit softmax weights) and
// B (K x 16, signed 8-bit value elements). Each cycle the caller presents one
// column of A (a_in, one element per row) and the matching row of B (b_in,
// one element per output column) with in_valid. Edge shift registers delay
// row i by i cycles and column j by j cycles, so that inside the array A
// moves right, B moves down and PE (i,j) multiplies matching elements and
// keeps its own accumulator (output stationary).
// Size and the output-stationary organisation follow the published V unit;
// operand signedness and the 24-bit accumulators are this design's choices.
//
// Timing: clear zeroes the accumulators. After the last in_valid cycle, acc
// is final NR+NC+1 cycles later. Cycles without in_valid feed zeros.
module systolic_array #(
  parameter int unsigned NR    = 8,
  parameter int unsigned NC    = 16,
  parameter int unsigned ACC_W = 24
) (
  input  logic                    clk,
  input  logic                    rst_n,
  input  logic                    clear,
  input  logic                    in_valid,
  input  logic [7:0]              a_in [NR],
  input  logic signed [7:0]       b_in [NC],
  output logic signed [ACC_W-1:0] acc  [NR][NC]
);

  // edge skew: row i delayed by i, column j delayed by j
  logic [7:0]        a_sk [NR][NR];
  logic signed [7:0] b_sk [NC][NC];
  logic [7:0]        a_r  [NR][NC];
  logic signed [7:0] b_r  [NR][NC];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NR; i++) for (int k = 0; k < NR; k++) a_sk[i][k] <= '0;
      for (int j = 0; j < NC; j++) for (int k = 0; k < NC; k++) b_sk[j][k] <= '0;
      for (int i = 0; i < NR; i++)
        for (int j = 0; j < NC; j++) begin
          a_r[i][j] <= '0;
          b_r[i][j] <= '0;
          acc[i][j] <= '0;
        end
    end else begin
      for (int i = 0; i < NR; i++) begin
        a_sk[i][0] <= in_valid ? a_in[i] : 8'd0;
        for (int k = 1; k < NR; k++) a_sk[i][k] <= a_sk[i][k-1];
      end
      for (int j = 0; j < NC; j++) begin
        b_sk[j][0] <= in_valid ? b_in[j] : 8'sd0;
        for (int k = 1; k < NC; k++) b_sk[j][k] <= b_sk[j][k-1];
      end
      for (int i = 0; i < NR; i++)
        for (int j = 0; j < NC; j++) begin
          a_r[i][j] <= (j == 0) ? a_sk[i][i] : a_r[i][j-1];
          b_r[i][j] <= (i == 0) ? b_sk[j][j] : b_r[i-1][j];
          if (clear) acc[i][j] <= '0;
          else       acc[i][j] <= acc[i][j] + ACC_W'($signed({1'b0, a_r[i][j]}) * b_r[i][j]);
        end
    end
  end

endmodule
