// systolic_array -- N x N output-stationary MAC array of the in-sensor NPU.
//
// Each cycle with in_valid the array takes one column of A (a_col[i] =
// A[i][k]) and one row of B (b_row[j] = B[k][j]) for the same k.  Inside,
// row i of A is delayed i cycles and column j of B j cycles, then the
// operands march right and down through the processing elements; PE(i,j)
// accumulates A[i][k]*B[k][j] into its own 32-bit register, so after the
// last operands have passed (2N-1 cycles after the last in_valid) acc holds
// the N x N tile C = A*B.  clr zeroes all accumulators.  Operands are signed
// 8-bit.
//
// A systolic MAC array is what the design uses in the sensor; the output-
// stationary dataflow, the 8-bit operands and the 32-bit accumulators are
// choices of this implementation.
//
// Timing: drain = 2N-1 cycles from the last in_valid edge to a complete acc.
module systolic_array #(
  parameter int unsigned N = 8
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clr,
  input  logic              in_valid,
  input  logic signed [7:0] a_col [N],
  input  logic signed [7:0] b_row [N],
  output logic signed [31:0] acc [N][N]
);
  // Skew lines: a_skew[i][d] is row i's operand delayed d+1 cycles.
  logic signed [7:0] a_pe [N][N];   // operand held in PE(i,j), moving right
  logic signed [7:0] b_pe [N][N];   // operand held in PE(i,j), moving down
  logic signed [7:0] a_dly [N][N];
  logic signed [7:0] b_dly [N][N];
  logic signed [7:0] a_in  [N];
  logic signed [7:0] b_in  [N];

  always_comb begin
    for (int i = 0; i < N; i++) begin
      a_in[i] = (i == 0) ? (in_valid ? a_col[0] : 8'sd0) : a_dly[i][i-1];
      b_in[i] = (i == 0) ? (in_valid ? b_row[0] : 8'sd0) : b_dly[i][i-1];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          a_dly[i][j] <= '0; b_dly[i][j] <= '0;
          a_pe[i][j]  <= '0; b_pe[i][j]  <= '0;
          acc[i][j]   <= '0;
        end
    end else begin
      for (int i = 0; i < N; i++) begin
        a_dly[i][0] <= in_valid ? a_col[i] : 8'sd0;
        b_dly[i][0] <= in_valid ? b_row[i] : 8'sd0;
        for (int d = 1; d < N; d++) begin
          a_dly[i][d] <= a_dly[i][d-1];
          b_dly[i][d] <= b_dly[i][d-1];
        end
      end
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          a_pe[i][j] <= (j == 0) ? a_in[i] : a_pe[i][j-1];
          b_pe[i][j] <= (i == 0) ? b_in[j] : b_pe[i-1][j];
          if (clr) acc[i][j] <= '0;
          else     acc[i][j] <= acc[i][j] + 32'(a_pe[i][j] * b_pe[i][j]);
        end
    end
  end
endmodule
