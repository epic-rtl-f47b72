// comp_engine: the GEMM part of the EPIC computation engine.
//
// The paper's computation engine runs the depth-estimation and saliency
// (HIR) CNNs on a 16x16 systolic array with a sequencer, a local buffer and a
// non-linear unit, and keeps weights and activations in a 768 KB SRAM. Here
// that SRAM is two 384 KB arrays of 128-bit words (activations, weights); a
// word holds 16 INT8 values, one array vector. The split, the word format and
// the command format are this design's choices.
//
// One command computes one 16x16 output tile:
//   C[i][j] = nl( sum_k A[i][k] * B[k][j] )
// where activation word a_addr+k holds column k of A, weight word b_addr+k
// holds row k of B, and the result row i is written to activation word
// c_addr+i. nl is the nonlinear_unit (shift, ReLU, INT8 saturation).
//
// Timing: cmd accepted when cmd_valid && cmd_ready; the sequencer feeds one
// vector pair per cycle (K cycles after a one-cycle SRAM read), waits for the
// array to finish, writes N result rows in N cycles, then pulses done: done
// is high K + 3N + 1 cycles after the cycle that accepts the command. The host ports may be used
// only while cmd_ready is high.
module comp_engine
  import epic_pkg::*;
#(
  parameter int unsigned N         = 16,
  parameter int unsigned ACT_WORDS = 24576,
  parameter int unsigned WGT_WORDS = 24576
) (
  input  logic              clk,
  input  logic              rst_n,
  // host access
  input  logic              host_we,
  input  logic              host_sel,      // 0: activation, 1: weight
  input  logic [14:0]       host_addr,
  input  logic [N*8-1:0]    host_wdata,
  input  logic [14:0]       host_raddr,
  output logic [N*8-1:0]    host_rdata,    // activation SRAM, one-cycle latency
  // command
  input  logic              cmd_valid,
  output logic              cmd_ready,
  input  gemm_cmd_t         cmd,
  output logic              done
);
  localparam int unsigned WAIT_CYC = 2 * N - 1;

  logic [N*8-1:0] act_mem [ACT_WORDS];
  logic [N*8-1:0] wgt_mem [WGT_WORDS];

  typedef enum logic [1:0] {S_IDLE, S_FEED, S_WAIT, S_DRAIN} state_e;
  state_e    state;
  gemm_cmd_t c_q;
  logic [14:0] k;
  logic [7:0]  wcnt;
  logic [$clog2(N)-1:0] row;

  logic            feed_v;
  logic [N*8-1:0]  a_rd, b_rd;
  logic            clear;
  logic signed [N-1:0][N-1:0][31:0] acc;
  logic signed [N-1:0][7:0] y_row;

  assign cmd_ready = (state == S_IDLE);
  assign clear     = (state == S_IDLE) && cmd_valid;

  // SRAM reads (registered)
  always_ff @(posedge clk) begin
    a_rd       <= act_mem[15'(c_q.a_addr + k)];
    b_rd       <= wgt_mem[15'(c_q.b_addr + k)];
    host_rdata <= act_mem[host_raddr];
  end

  // SRAM writes: sequencer result rows, otherwise host
  always_ff @(posedge clk) begin
    if (state == S_DRAIN) begin
      act_mem[15'(c_q.c_addr + 15'(row))] <= y_row;
    end else if (host_we && state == S_IDLE) begin
      if (host_sel) wgt_mem[host_addr] <= host_wdata;
      else          act_mem[host_addr] <= host_wdata;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      c_q    <= '0;
      k      <= '0;
      wcnt   <= '0;
      row    <= '0;
      feed_v <= 1'b0;
      done   <= 1'b0;
    end else begin
      done   <= 1'b0;
      feed_v <= 1'b0;
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          c_q   <= cmd;
          k     <= '0;
          state <= (cmd.k_len == 0) ? S_WAIT : S_FEED;
          wcnt  <= '0;
        end
        S_FEED: begin
          feed_v <= 1'b1;                // data of address k valid next cycle
          if (k == c_q.k_len - 1'b1) begin
            state <= S_WAIT;
            wcnt  <= '0;
          end else begin
            k <= k + 1'b1;
          end
        end
        S_WAIT: begin
          if (wcnt == 8'(WAIT_CYC)) begin
            state <= S_DRAIN;
            row   <= '0;
          end else begin
            wcnt <= wcnt + 1'b1;
          end
        end
        S_DRAIN: begin
          if (row == $clog2(N)'(N - 1)) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            row <= row + 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  systolic_array #(.N(N), .DATA_W(8), .ACC_W(32)) u_sa (
    .clk, .rst_n, .clear,
    .in_valid(feed_v),
    .a_col   (a_rd),
    .b_row   (b_rd),
    .acc     (acc)
  );

  for (genvar j = 0; j < N; j++) begin : g_nl
    nonlinear_unit #(.ACC_W(32), .OUT_W(8)) u_nl (
      .acc  (acc[row][j]),
      .shift(c_q.shift),
      .relu (c_q.relu),
      .y    (y_row[j])
    );
  end
endmodule
