// pose_unit: builds the reprojection matrix of Eq. (1) from two camera poses
// ("Matrix Inverse" and "Matrix Trans." of the computation engine).
//
// A pose is camera-to-world: rotation R (Q2.14) and translation t (Q8.8, in
// depth units). The relative transform from the buffered camera (pose_c) to the
// current camera (pose_t) uses the rigid-body inverse of the current pose,
// which needs only a transpose:
//   R = Rt^T Rc,   t = Rt^T (tc - tt).
// With pixel coordinates taken relative to the principal point (frame
// centre), intrinsics K = diag(f, f, 1) and
//   M = f * [K R K^-1 | K t]
// the target pixel of a source pixel (u, v) with depth d is
//   h = M [u*d, v*d, d, 1]^T,   (u', v') = (h0 / h2, h1 / h2).
// The factor f removes every division by f and cancels in the perspective
// divide. All four columns share the scale 2^14. Fixed-point formats, the
// camera model and the frame-centre principal point are this design's
// choices; the paper gives the chain T_wc(f) T_p1->p2 T_cw(f, d1).
//
// Timing: combinational products, registered output; m is valid one cycle
// after the inputs (m_valid follows in_valid).
module pose_unit
  import epic_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        in_valid,
  input  pose_t       pose_c,
  input  pose_t       pose_t_cur,
  input  logic [11:0] focal,
  output logic        m_valid,
  output rmat_t       m
);
  logic signed [31:0] rr [3][3];
  logic signed [31:0] tr [3];
  logic signed [16:0] dt [3];
  logic signed [63:0] f1, f2;
  rmat_t m_d;

  // unpacked signed copies of the pose fields
  logic signed [15:0] rc [9], rt [9], tc [3], tt [3];
  always_comb begin
    for (int e = 0; e < 9; e++) begin
      rc[e] = pose_c.r[e];
      rt[e] = pose_t_cur.r[e];
    end
    for (int e = 0; e < 3; e++) begin
      tc[e] = pose_c.t[e];
      tt[e] = pose_t_cur.t[e];
    end
  end

  always_comb begin
    for (int k = 0; k < 3; k++)
      dt[k] = 17'(tc[k]) - 17'(tt[k]);
    for (int i = 0; i < 3; i++) begin
      for (int j = 0; j < 3; j++) begin
        logic signed [35:0] s;
        s = '0;
        for (int k = 0; k < 3; k++)
          s = s + 36'(rt[3*k+i]) * 36'(rc[3*k+j]);
        rr[i][j] = 32'(s >>> ROT_FRAC);
      end
      begin
        logic signed [39:0] s2;
        s2 = '0;
        for (int k = 0; k < 3; k++)
          s2 = s2 + 40'(rt[3*k+i]) * 40'(dt[k]);
        tr[i] = 32'(s2 >>> ROT_FRAC);
      end
    end
    f1 = 64'(focal);
    f2 = f1 * f1;
    for (int i = 0; i < 2; i++) begin
      m_d[4*i+0] = f1 * 64'(rr[i][0]);
      m_d[4*i+1] = f1 * 64'(rr[i][1]);
      m_d[4*i+2] = f2 * 64'(rr[i][2]);
      m_d[4*i+3] = (f2 * 64'(tr[i])) <<< (ROT_FRAC - TRN_FRAC);
    end
    m_d[8]  = 64'(rr[2][0]);
    m_d[9]  = 64'(rr[2][1]);
    m_d[10] = f1 * 64'(rr[2][2]);
    m_d[11] = (f1 * 64'(tr[2])) <<< (ROT_FRAC - TRN_FRAC);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      m_valid <= 1'b0;
      m       <= '0;
    end else begin
      m_valid <= in_valid;
      if (in_valid) m <= m_d;
    end
  end
endmodule
