// tb_comp_engine: loads random INT8 matrices into the activation and weight
// SRAMs through the host port, runs tile commands (different K, shift and
// ReLU settings, one with K = 1), reads the 16 result rows back and compares
// them with C = sat8(relu?((A x B + round) >> shift)) computed in the
// testbench. Also checks that done comes K + 3N + 1 cycles after the
// command is accepted.
module tb_comp_engine;
  import epic_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic host_we, host_sel, cmd_valid, cmd_ready, done;
  logic [14:0] host_addr, host_raddr;
  logic [127:0] host_wdata, host_rdata;
  gemm_cmd_t cmd;
  comp_engine #(.N(N), .ACT_WORDS(4096), .WGT_WORDS(4096)) dut (.*);

  int checks = 0, failures = 0;
  int signed A [N][128], B [128][N];

  function automatic int nl(longint a, int s, bit r);
    longint v;
    v = (s == 0) ? a : ((a + (64'sd1 <<< (s - 1))) >>> s);
    if (r && v < 0) v = 0;
    if (v > 127) v = 127;
    if (v < -128) v = -128;
    return int'(v);
  endfunction

  task automatic run(input int K, input int sh, input bit relu, input int abase, input int bbase, input int cbase);
    int t0, t1;
    longint c;
    logic [127:0] w;
    for (int i = 0; i < N; i++) for (int k = 0; k < K; k++) A[i][k] = $signed(8'($urandom));
    for (int k = 0; k < K; k++) for (int j = 0; j < N; j++) B[k][j] = $signed(8'($urandom));
    for (int k = 0; k < K; k++) begin
      @(negedge clk);
      host_we = 1; host_sel = 0; host_addr = 15'(abase + k);
      for (int i = 0; i < N; i++) host_wdata[i*8 +: 8] = 8'(A[i][k]);
      @(negedge clk);
      host_sel = 1; host_addr = 15'(bbase + k);
      for (int j = 0; j < N; j++) host_wdata[j*8 +: 8] = 8'(B[k][j]);
    end
    @(negedge clk); host_we = 0;
    cmd = '{a_addr: 15'(abase), b_addr: 15'(bbase), c_addr: 15'(cbase), k_len: 15'(K), shift: 5'(sh), relu: relu};
    cmd_valid = 1;
    @(posedge clk); t0 = $time; #1 cmd_valid = 0;
    @(posedge clk);
    while (!done) @(posedge clk);
    t1 = $time;
    checks++;
    if ((t1 - t0) / 10 != K + 3 * N + 1) begin failures++; $display("FAIL latency %0d (K=%0d)", (t1 - t0) / 10, K); end
    for (int i = 0; i < N; i++) begin
      @(negedge clk); host_raddr = 15'(cbase + i);
      @(negedge clk); w = host_rdata;
      for (int j = 0; j < N; j++) begin
        c = 0; for (int k = 0; k < K; k++) c += A[i][k] * B[k][j];
        checks++;
        if ($signed(w[j*8 +: 8]) != nl(c, sh, relu)) begin
          failures++;
          if (failures < 6) $display("FAIL C[%0d][%0d]=%0d exp %0d", i, j, $signed(w[j*8 +: 8]), nl(c, sh, relu));
        end
      end
    end
  endtask

  initial begin
    host_we = 0; host_sel = 0; host_addr = 0; host_wdata = 0; host_raddr = 0; cmd_valid = 0; cmd = '0;
    repeat (2) @(negedge clk); rst_n = 1;
    run(16, 6, 1'b1, 0, 0, 1000);
    run(40, 9, 1'b0, 100, 200, 1100);
    run(1, 0, 1'b0, 300, 300, 1200);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
