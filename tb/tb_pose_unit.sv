// tb_pose_unit: random pairs of camera poses (rotations up to about 0.3 rad,
// translations up to 8 depth units) and focal lengths; the matrix from the
// pose unit is compared element by element with f*[K R K^-1 | K t] * 2^14
// computed in floating point from the quantized poses, within a tolerance
// that covers the Q2.14 rounding of the composed rotation. Checks the
// one-cycle latency of m_valid. Includes the identity case (same pose).
module tb_pose_unit;
  import epic_pkg::*;
  import tb_geom_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, m_valid;
  pose_t pose_c, pose_t_cur;
  logic [11:0] focal;
  rmat_t m;
  pose_unit dut (.*);
  int checks = 0, failures = 0;

  initial begin
    mat3 r1, r2;
    real t1 [3], t2 [3], mi [12], f, tol, sc;
    logic signed [63:0] me;
    in_valid = 0; pose_c = '0; pose_t_cur = '0; focal = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      rot(rnd(-0.3, 0.3), rnd(-0.3, 0.3), rnd(-0.3, 0.3), r1);
      if (n % 10 == 0) r2 = r1; else rot(rnd(-0.3, 0.3), rnd(-0.3, 0.3), rnd(-0.3, 0.3), r2);
      for (int i = 0; i < 3; i++) begin t1[i] = rnd(-8, 8); t2[i] = (n % 10 == 0) ? t1[i] : rnd(-8, 8); end
      pose_c = quant(r1, t1);
      pose_t_cur = quant(r2, t2);
      focal = 12'($urandom_range(200, 900));
      f = real'(focal);
      ideal_m(r1, t1, r2, t2, f, mi);
      @(negedge clk); in_valid = 1;
      @(negedge clk); in_valid = 0;
      checks++;
      if (!m_valid) begin failures++; $display("FAIL m_valid latency"); end
      for (int e = 0; e < 12; e++) begin
        // scale of the element: f^a * 2^14
        sc = (e == 2 || e == 6) ? f * f : (e == 3 || e == 7) ? f * f : (e == 10 || e == 11) ? f : (e >= 8) ? 1.0 : f;
        tol = sc * 16384.0 * ((e % 4 == 3) ? 0.01 : 0.0008) + 2.0;
        me = m[e];
        checks++;
        if ((real'(me) - mi[e]) > tol || (mi[e] - real'(me)) > tol) begin
          failures++;
          if (failures < 6) $display("FAIL n=%0d m[%0d]=%0d ideal %f tol %f", n, e, me, mi[e], tol);
        end
      end
    end
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
