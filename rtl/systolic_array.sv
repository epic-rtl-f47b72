// systolic_array: N x N output-stationary INT8 multiply-accumulate array of
// the computation engine (16x16 in the paper).
//
// Each cycle with in_valid the array takes one column of A (a_col, element i
// for row i) and one row of B (b_row, element j for column j). Row i of a_col
// is delayed i cycles and column j of b_row j cycles before entering the
// array, so that a[i][k] and b[k][j] meet in PE(i,j), which accumulates
// C[i][j] += a[i][k] * b[k][j]. The valid bit travels with the A operand.
// The dataflow (output stationary, skewed inputs) is this design's choice; the
// paper gives only the array size.
//
// Timing: the accumulators are final 2N-1 cycles after the cycle that
// presents the last input vector (row/column skew plus travel through the
// grid: a[i][k] and b[k][j] reach PE(i,j) i+j cycles after entry, then one
// register). clear zeroes all accumulators.
module systolic_array #(
  parameter int unsigned N      = 16,
  parameter int unsigned DATA_W = 8,
  parameter int unsigned ACC_W  = 32
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  logic                              clear,
  input  logic                              in_valid,
  input  logic signed [N-1:0][DATA_W-1:0]   a_col,
  input  logic signed [N-1:0][DATA_W-1:0]   b_row,
  output logic signed [N-1:0][N-1:0][ACC_W-1:0] acc
);
  // skew registers: row i delayed by i, column j by j
  logic signed [DATA_W-1:0] a_sk [N][N];
  logic                     v_sk [N][N];
  logic signed [DATA_W-1:0] b_sk [N][N];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++)
        for (int s = 0; s < N; s++) begin
          a_sk[i][s] <= '0;
          v_sk[i][s] <= 1'b0;
          b_sk[i][s] <= '0;
        end
    end else begin
      for (int i = 0; i < N; i++) begin
        a_sk[i][0] <= a_col[i];
        v_sk[i][0] <= in_valid;
        b_sk[i][0] <= in_valid ? b_row[i] : '0;
        for (int s = 1; s < N; s++) begin
          a_sk[i][s] <= a_sk[i][s-1];
          v_sk[i][s] <= v_sk[i][s-1];
          b_sk[i][s] <= b_sk[i][s-1];
        end
      end
    end
  end

  // PE grid wiring: a flows right, b flows down
  logic signed [DATA_W-1:0] a_w [N][N+1];
  logic                     v_w [N][N+1];
  logic signed [DATA_W-1:0] b_w [N+1][N];

  for (genvar i = 0; i < N; i++) begin : g_row_in
    // row i enters after i skew stages (stage index i-1; row 0 directly)
    if (i == 0) begin : g_r0
      assign a_w[0][0] = in_valid ? a_col[0] : '0;
      assign v_w[0][0] = in_valid;
    end else begin : g_rn
      assign a_w[i][0] = a_sk[i][i-1];
      assign v_w[i][0] = v_sk[i][i-1];
    end
  end
  for (genvar j = 0; j < N; j++) begin : g_col_in
    if (j == 0) begin : g_c0
      assign b_w[0][0] = in_valid ? b_row[0] : '0;
    end else begin : g_cn
      assign b_w[0][j] = b_sk[j][j-1];
    end
  end

  for (genvar i = 0; i < N; i++) begin : g_r
    for (genvar j = 0; j < N; j++) begin : g_c
      systolic_pe #(.DATA_W(DATA_W), .ACC_W(ACC_W)) u_pe (
        .clk, .rst_n, .clear,
        .a_vld_in (v_w[i][j]),
        .a_in     (a_w[i][j]),
        .b_in     (b_w[i][j]),
        .a_vld_out(v_w[i][j+1]),
        .a_out    (a_w[i][j+1]),
        .b_out    (b_w[i+1][j]),
        .acc      (acc[i][j])
      );
    end
  end
endmodule
