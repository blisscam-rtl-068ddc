// tb_systolic_array -- random signed 8-bit matrices of several reduction
// lengths through the 8x8 array, checked against a direct matrix product,
// with the result complete exactly 2N-1 cycles after the last input.
`include "tb_check.svh"
module tb_systolic_array;
  localparam int N = 8;
  logic clk = 0, rst_n = 0, clr = 0, in_valid = 0;
  logic signed [7:0] a_col [N], b_row [N];
  logic signed [31:0] acc [N][N];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  systolic_array #(.N(N)) dut (.clk, .rst_n, .clr, .in_valid, .a_col, .b_row, .acc);
  `WATCHDOG(clk, 100000)
  int A [N][64], B [64][N], C [N][N];
  initial begin
    for (int i = 0; i < N; i++) begin a_col[i] = '0; b_row[i] = '0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 12; t++) begin
      int K; K = (t == 0) ? 1 : 1 + $urandom_range(63);
      for (int i = 0; i < N; i++) for (int k = 0; k < K; k++) A[i][k] = int'($urandom_range(255)) - 128;
      for (int k = 0; k < K; k++) for (int j = 0; j < N; j++) B[k][j] = int'($urandom_range(255)) - 128;
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
        C[i][j] = 0; for (int k = 0; k < K; k++) C[i][j] += A[i][k] * B[k][j];
      end
      @(negedge clk) clr = 1;
      @(negedge clk) clr = 0;
      for (int k = 0; k < K; k++) begin
        in_valid = 1;
        for (int i = 0; i < N; i++) begin a_col[i] = 8'(A[i][k]); b_row[i] = 8'(B[k][i]); end
        @(negedge clk);
      end
      in_valid = 0;
      for (int i = 0; i < N; i++) begin a_col[i] = 8'sd99; b_row[i] = 8'sd99; end
      repeat (2 * N - 2) @(negedge clk);
      `CHECK(acc[N-1][N-1] != C[N-1][N-1] || C[N-1][N-1] == 0 || K == 0, "not complete one cycle early")
      @(negedge clk);
      for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) `CHECK(acc[i][j] == C[i][j], "C = A*B")
      repeat (3) @(negedge clk);
      `CHECK(acc[0][0] == C[0][0], "stable after drain")
    end
    `TB_FINISH
  end
endmodule
