// point_reproject: applies Eq. (1) to one pixel per cycle.
//
// Stage 1 lifts the centred source pixel (u, v) with depth d to the
// homogeneous vector [u*d, v*d, d, 1] and multiplies it by the 3x4 matrix m
// from pose_unit. Stage 2 performs the perspective divide (integer division,
// truncating toward zero). ok is low when the point lies behind the camera
// (h2 <= 0) or when the target falls outside the signed COORD_W range.
//
// Timing: fully pipelined, two-cycle latency; out_valid follows in_valid and
// tag is carried along with the point.
module point_reproject
  import epic_pkg::*;
#(
  parameter int unsigned TAG_W = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       in_valid,
  input  rmat_t                      m,
  input  logic signed [COORD_W-1:0]  u,
  input  logic signed [COORD_W-1:0]  v,
  input  logic        [DEP_W-1:0]    d,
  input  logic        [TAG_W-1:0]    tag_in,
  output logic                       out_valid,
  output logic signed [COORD_W-1:0]  uo,
  output logic signed [COORD_W-1:0]  vo,
  output logic                       ok,
  output logic        [TAG_W-1:0]    tag_out
);
  localparam logic signed [63:0] CMAX = 64'((1 << (COORD_W-1)) - 1);
  localparam logic signed [63:0] CMIN = -64'(1 << (COORD_W-1));

  logic signed [63:0] h_d [3];
  logic signed [63:0] h_q [3];
  logic               v1;
  logic [TAG_W-1:0]   tag1;

  logic signed [63:0] me [12];     // unpacked signed copy of m
  always_comb
    for (int e = 0; e < 12; e++) me[e] = m[e];

  always_comb begin
    logic signed [63:0] ud, vd, dd;
    ud = 64'(u) * 64'($signed({1'b0, d}));
    vd = 64'(v) * 64'($signed({1'b0, d}));
    dd = 64'($signed({1'b0, d}));
    for (int i = 0; i < 3; i++)
      h_d[i] = me[4*i] * ud + me[4*i+1] * vd + me[4*i+2] * dd + me[4*i+3];
  end

  logic signed [63:0] q0, q1;
  logic               front;
  assign front = (h_q[2] > 0);
  assign q0 = front ? h_q[0] / h_q[2] : 64'sd0;
  assign q1 = front ? h_q[1] / h_q[2] : 64'sd0;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0; tag1 <= '0;
      for (int i = 0; i < 3; i++) h_q[i] <= '0;
      out_valid <= 1'b0; uo <= '0; vo <= '0; ok <= 1'b0; tag_out <= '0;
    end else begin
      v1   <= in_valid;
      tag1 <= tag_in;
      for (int i = 0; i < 3; i++) h_q[i] <= h_d[i];
      out_valid <= v1;
      tag_out   <= tag1;
      uo <= q0[COORD_W-1:0];
      vo <= q1[COORD_W-1:0];
      ok <= front && q0 <= CMAX && q0 >= CMIN && q1 <= CMAX && q1 >= CMIN;
    end
  end
endmodule
