// tb_geom_pkg: real-valued camera geometry shared by the geometry
// testbenches: random small rotations, pose quantization to the Q2.14/Q8.8
// formats and the ideal reprojection matrix f*[K R K^-1 | K t] * 2^14.
package tb_geom_pkg;
  import epic_pkg::*;

  typedef real mat3 [3][3];

  function automatic void rot(input real a, input real b, input real c, output mat3 r);
    real ca, sa, cb, sb, cc, sc;
    ca = $cos(a); sa = $sin(a); cb = $cos(b); sb = $sin(b); cc = $cos(c); sc = $sin(c);
    // Rz(a) * Ry(b) * Rx(c)
    r[0][0] = ca*cb; r[0][1] = ca*sb*sc - sa*cc; r[0][2] = ca*sb*cc + sa*sc;
    r[1][0] = sa*cb; r[1][1] = sa*sb*sc + ca*cc; r[1][2] = sa*sb*cc - ca*sc;
    r[2][0] = -sb;   r[2][1] = cb*sc;            r[2][2] = cb*cc;
  endfunction

  function automatic real rnd(real lo, real hi);
    return lo + (hi - lo) * real'($urandom_range(1000000)) / 1000000.0;
  endfunction

  // quantize a real pose; the real values are replaced by the quantized ones
  function automatic pose_t quant(ref mat3 r, ref real t [3]);
    pose_t p;
    logic signed [15:0] q;
    for (int i = 0; i < 3; i++) for (int j = 0; j < 3; j++) begin
      q = 16'($rtoi(r[i][j] * 16384.0 + (r[i][j] >= 0 ? 0.5 : -0.5)));
      p.r[3*i+j] = q;
      r[i][j] = real'(q) / 16384.0;
    end
    for (int i = 0; i < 3; i++) begin
      q = 16'($rtoi(t[i] * 256.0 + (t[i] >= 0 ? 0.5 : -0.5)));
      p.t[i] = q;
      t[i] = real'(q) / 256.0;
    end
    return p;
  endfunction

  // ideal M (reals, scale 2^14) for camera c -> camera t
  function automatic void ideal_m(input mat3 rc, input real tc [3], input mat3 rt, input real tt [3],
                                  input real f, output real m [12]);
    real rr [3][3];
    real tr [3];
    for (int i = 0; i < 3; i++) begin
      for (int j = 0; j < 3; j++) begin
        rr[i][j] = 0;
        for (int k = 0; k < 3; k++) rr[i][j] += rt[k][i] * rc[k][j];
      end
      tr[i] = 0;
      for (int k = 0; k < 3; k++) tr[i] += rt[k][i] * (tc[k] - tt[k]);
    end
    for (int i = 0; i < 2; i++) begin
      m[4*i+0] = f * rr[i][0] * 16384.0;
      m[4*i+1] = f * rr[i][1] * 16384.0;
      m[4*i+2] = f * f * rr[i][2] * 16384.0;
      m[4*i+3] = f * f * tr[i] * 16384.0;
    end
    m[8]  = rr[2][0] * 16384.0;
    m[9]  = rr[2][1] * 16384.0;
    m[10] = f * rr[2][2] * 16384.0;
    m[11] = f * tr[2] * 16384.0;
  endfunction
endpackage
