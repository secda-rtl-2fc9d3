// tb_systolic_array: self-checking test of the N x N output-stationary array.
// For several random operand matrices A (N x K) and B (N x K) it feeds row r
// element k at step k+r and column c element k at step k+c (zero elsewhere),
// with random stall cycles (step_en low), and after K + 2N - 1 steps checks
// every accumulator against sum_k A[r][k]*B[c][k]. The array is cleared
// between tiles; the step count is checked to be exactly K + 2N - 1.
module tb_systolic_array;
  import secda_pkg::*;
  localparam int unsigned N = 16;
  logic clk = 0, rst_n = 0, clr = 0, step_en = 0;
  logic signed [OPND_W-1:0] a_in [N], b_in [N];
  logic signed [ACC_W-1:0]  acc [N][N];
  int checks = 0, failures = 0;

  systolic_array #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int K;
  logic signed [OPND_W-1:0] A [N][64];
  logic signed [OPND_W-1:0] B [N][64];

  initial begin
    int steps;
    for (int i = 0; i < N; i++) begin a_in[i] = '0; b_in[i] = '0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int tile = 0; tile < 6; tile++) begin
      K = (tile == 0) ? 1 : 4 * (1 + $urandom % 16);
      for (int r = 0; r < N; r++)
        for (int k = 0; k < K; k++) begin
          A[r][k] = (tile == 5) ? -9'sd256 : OPND_W'($urandom);
          B[r][k] = (tile == 5) ? -9'sd256 : OPND_W'($urandom);
        end
      @(negedge clk); clr = 1;
      @(negedge clk); clr = 0;
      steps = 0;
      for (int t = 0; t < K + 2 * N - 1; ) begin
        step_en = ($urandom % 5) != 0;
        for (int i = 0; i < N; i++) begin
          a_in[i] = (t >= i && t - i < K) ? A[i][t-i] : '0;
          b_in[i] = (t >= i && t - i < K) ? B[i][t-i] : '0;
        end
        @(negedge clk);
        if (step_en) begin t++; steps++; end
      end
      step_en = 0;
      checks++;
      if (steps != K + 2 * N - 1) failures++;
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++) begin
          logic signed [ACC_W-1:0] s;
          s = 0;
          for (int k = 0; k < K; k++) s += ACC_W'(A[r][k]) * ACC_W'(B[c][k]);
          checks++;
          if (acc[r][c] != s) begin
            failures++;
            if (failures < 10) $display("FAIL tile %0d acc[%0d][%0d]=%0d exp %0d", tile, r, c, acc[r][c], s);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
