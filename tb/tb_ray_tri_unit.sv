// tb_ray_tri_unit: random rays against random triangles, compared with a
// Moller-Trumbore test done in real arithmetic, including back-face culling
// (a hit needs det > 0). Cases near an edge or near det = 0 are skipped for
// the hit flag; on hits t must agree to within 0.01.
module tb_ray_tri_unit;
  import grtx_pkg::*;
  ray_t ray;
  vec3_t v0, v1, v2;
  logic hit;
  fx_t t_hit;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  ray_tri_unit dut (.*);

  function automatic fx_t fx(input real r);
    return fx_t'($rtoi(r * 65536.0));
  endfunction
  function automatic real rl(input fx_t v);
    return real'(v) / 65536.0;
  endfunction
  function automatic real rnd(input real lo, input real hi);
    return lo + (hi - lo) * real'($urandom_range(0, 100000)) / 100000.0;
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int hits = 0, culled = 0;
    for (int i = 0; i < 4000; i++) begin
      real o[3], d[3], a[3], b[3], c[3], e1[3], e2[3], p[3], s[3], q[3];
      real det, u, v, t;
      for (int k = 0; k < 3; k++) begin
        o[k] = rnd(-3, 3); d[k] = rnd(-1, 1);
        a[k] = rnd(-1.5, 1.5); b[k] = rnd(-1.5, 1.5); c[k] = rnd(-1.5, 1.5);
      end
      // Aim half of the rays at the triangle's centroid.
      if (i % 2 == 0)
        for (int k = 0; k < 3; k++) d[k] = ((a[k] + b[k] + c[k]) / 3.0 - o[k]) * 0.5;
      ray.org = '{fx(o[0]), fx(o[1]), fx(o[2])};
      ray.dir = '{fx(d[0]), fx(d[1]), fx(d[2])};
      ray.inv = '0;
      v0 = '{fx(a[0]), fx(a[1]), fx(a[2])};
      v1 = '{fx(b[0]), fx(b[1]), fx(b[2])};
      v2 = '{fx(c[0]), fx(c[1]), fx(c[2])};
      for (int k = 0; k < 3; k++) begin e1[k] = b[k] - a[k]; e2[k] = c[k] - a[k]; s[k] = o[k] - a[k]; end
      p[0] = d[1]*e2[2] - d[2]*e2[1]; p[1] = d[2]*e2[0] - d[0]*e2[2]; p[2] = d[0]*e2[1] - d[1]*e2[0];
      q[0] = s[1]*e1[2] - s[2]*e1[1]; q[1] = s[2]*e1[0] - s[0]*e1[2]; q[2] = s[0]*e1[1] - s[1]*e1[0];
      det = e1[0]*p[0] + e1[1]*p[1] + e1[2]*p[2];
      u = s[0]*p[0] + s[1]*p[1] + s[2]*p[2];
      v = d[0]*q[0] + d[1]*q[1] + d[2]*q[2];
      t = (det != 0.0) ? (e2[0]*q[0] + e2[1]*q[1] + e2[2]*q[2]) / det : 0.0;
      #1;
      if (det > 0.02 || det < -0.02) begin
        real m;
        m = (det > 0) ? det : -det;
        if ((u > 0.01*m || u < -0.01*m) && (v > 0.01*m || v < -0.01*m) &&
            (det - u - v > 0.01*m || det - u - v < -0.01*m)) begin
          logic eh;
          eh = (det > 0) && (u >= 0) && (v >= 0) && (u + v <= det);
          if (det < 0 && u/det >= 0 && v/det >= 0 && (u+v)/det <= 1) culled++;
          checks++;
          if (hit !== eh) begin
            failures++;
            $display("FAIL hit=%0b expected %0b det=%f u=%f v=%f", hit, eh, det, u, v);
          end else if (eh) begin
            hits++;
            checks++;
            if (rl(t_hit) - t > 0.01 || t - rl(t_hit) > 0.01) begin
              failures++;
              $display("FAIL t=%f expected %f", rl(t_hit), t);
            end
          end
        end
      end
    end
    checks++;
    if (hits < 100 || culled < 100) begin
      failures++; $display("FAIL coverage hits=%0d culled=%0d", hits, culled);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
