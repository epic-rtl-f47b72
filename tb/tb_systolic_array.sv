// tb_systolic_array: feeds random signed INT8 matrices A (16xK) and B (Kx16)
// into the 16x16 systolic array one column/row pair per cycle, then checks
// every accumulator against a matrix product computed in the testbench, and
// checks that the result is complete exactly 2N-1 cycles after the last input
// (and not one cycle earlier). Two runs with different K check clear.
module tb_systolic_array;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic clear, in_valid;
  logic signed [N-1:0][7:0] a_col, b_row;
  logic signed [N-1:0][N-1:0][31:0] acc;
  systolic_array #(.N(N)) dut (.*);

  int checks = 0, failures = 0;
  int signed A [N][64], B [64][N];

  task automatic run(input int K);
    int signed c;
    int bad_early;
    for (int i = 0; i < N; i++) for (int k = 0; k < K; k++) A[i][k] = $signed(8'($urandom));
    for (int k = 0; k < K; k++) for (int j = 0; j < N; j++) B[k][j] = $signed(8'($urandom));
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int k = 0; k < K; k++) begin
      in_valid = 1;
      for (int i = 0; i < N; i++) a_col[i] = 8'(A[i][k]);
      for (int j = 0; j < N; j++) b_row[j] = 8'(B[k][j]);
      @(negedge clk);
    end
    in_valid = 0; a_col = '0; b_row = '0;
    // now 1 cycle after the last input edge
    repeat (2 * N - 3) @(negedge clk);
    // one cycle early: the far corner must not be final yet
    c = 0; for (int k = 0; k < K; k++) c += A[N-1][k] * B[k][N-1];
    bad_early = (acc[N-1][N-1] == c) && (c != 0);
    checks++; if (bad_early) begin failures++; $display("FAIL: result early"); end
    @(negedge clk);
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin
      c = 0; for (int k = 0; k < K; k++) c += A[i][k] * B[k][j];
      checks++;
      if (acc[i][j] !== c) begin failures++; if (failures < 5) $display("FAIL C[%0d][%0d]=%0d exp %0d", i, j, acc[i][j], c); end
    end
  endtask

  initial begin
    clear = 0; in_valid = 0; a_col = '0; b_row = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    run(16);
    run(37);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
