// tb_point_reproject: builds the reprojection matrix in floating point from
// random poses (rounded to integers), places a random 3-D point in front of
// the first camera at integer depth, and checks that the unit maps its pixel
// to the pixel where the second camera sees the same point (computed with
// real-valued geometry), within one pixel. Points behind the second camera
// must give ok = 0. Points are streamed back to back to check the two-cycle
// pipeline latency and the tag.
module tb_point_reproject;
  import epic_pkg::*;
  import tb_geom_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, out_valid, ok;
  rmat_t m;
  logic signed [COORD_W-1:0] u, v, uo, vo;
  logic [7:0] d;
  logic [15:0] tag_in, tag_out;
  point_reproject #(.TAG_W(16)) dut (.*);
  int checks = 0, failures = 0;

  typedef struct { int eu; int ev; bit eok; } exp_t;
  exp_t expq [$];
  int issued = 0;

  always @(negedge clk) if (out_valid) begin
    exp_t e;
    e = expq.pop_front();
    checks++;
    if (ok != e.eok) begin failures++; $display("FAIL ok=%0d exp %0d (%0d,%0d)", ok, e.eok, uo, vo); end
    else if (e.eok) begin
      checks++;
      if (int'(uo) - e.eu > 1 || e.eu - int'(uo) > 1 || int'(vo) - e.ev > 1 || e.ev - int'(vo) > 1) begin
        failures++;
        if (failures < 6) $display("FAIL (%0d,%0d) exp (%0d,%0d)", uo, vo, e.eu, e.ev);
      end
    end
  end

  initial begin
    mat3 r1, r2;
    real t1 [3], t2 [3], mi [12], f, x1 [3], xw [3], x2 [3];
    pose_t p1, p2;
    in_valid = 0; m = '0; u = 0; v = 0; d = 0; tag_in = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int s = 0; s < 40; s++) begin
      rot(rnd(-0.2, 0.2), rnd(-0.2, 0.2), rnd(-0.2, 0.2), r1);
      rot(rnd(-0.2, 0.2), rnd(-0.2, 0.2), rnd(-0.2, 0.2), r2);
      for (int i = 0; i < 3; i++) begin t1[i] = rnd(-4, 4); t2[i] = rnd(-4, 4); end
      p1 = quant(r1, t1); p2 = quant(r2, t2);
      f = real'($urandom_range(300, 700));
      ideal_m(r1, t1, r2, t2, f, mi);
      @(negedge clk);
      for (int e = 0; e < 12; e++) m[e] = longint'(mi[e]);
      for (int n = 0; n < 50; n++) begin
        exp_t e;
        int uu, vv, dd;
        uu = $urandom_range(600) - 300; vv = $urandom_range(440) - 220;
        dd = (s % 8 == 7) ? $urandom_range(1, 6) : $urandom_range(30, 250);
        x1[0] = uu * dd / f; x1[1] = vv * dd / f; x1[2] = dd;
        for (int i = 0; i < 3; i++) xw[i] = r1[i][0]*x1[0] + r1[i][1]*x1[1] + r1[i][2]*x1[2] + t1[i];
        for (int i = 0; i < 3; i++) x2[i] = r2[0][i]*(xw[0]-t2[0]) + r2[1][i]*(xw[1]-t2[1]) + r2[2][i]*(xw[2]-t2[2]);
        e.eok = (x2[2] > 0.05);
        if (e.eok) begin
          e.eu = $rtoi(f * x2[0] / x2[2]);
          e.ev = $rtoi(f * x2[1] / x2[2]);
          if (e.eu > 2047 || e.eu < -2048 || e.ev > 2047 || e.ev < -2048) e.eok = 0;
        end
        // skip borderline cases (nearly on the image plane or the range edge)
        if ((x2[2] > -0.05 && x2[2] < 0.3) || (e.eok && (e.eu > 2040 || e.eu < -2040 || e.ev > 2040 || e.ev < -2040))) continue;
        u = COORD_W'(uu); v = COORD_W'(vv); d = 8'(dd); tag_in = 16'(issued);
        in_valid = 1; issued++;
        expq.push_back(e);
        @(negedge clk);
        in_valid = 0;
      end
      repeat (3) @(negedge clk);
    end
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d results missing", expq.size()); end
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
