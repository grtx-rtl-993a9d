// tb_ray_transform_unit: random 3x4 matrices applied to random rays,
// compared with the same affine transform in real arithmetic (origin as a
// point, direction as a vector, reciprocal direction recomputed).
module tb_ray_transform_unit;
  import grtx_pkg::*;
  ray_t ray_in, ray_out;
  mat34_t m;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  ray_transform_unit dut (.*);

  function automatic fx_t fx(input real r);
    return fx_t'($rtoi(r * 65536.0));
  endfunction
  function automatic real rl(input fx_t v);
    return real'(v) / 65536.0;
  endfunction
  function automatic real rnd(input real lo, input real hi);
    return lo + (hi - lo) * real'($urandom_range(0, 100000)) / 100000.0;
  endfunction
  task automatic near(input fx_t got, input real exp, input real tol, input string what);
    real g;
    g = rl(got);
    checks++;
    if (g - exp > tol || exp - g > tol) begin
      failures++;
      $display("FAIL %s: %f expected %f", what, g, exp);
    end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      real mm[12], o[3], d[3], eo[3], ed[3];
      for (int k = 0; k < 12; k++) begin mm[k] = rnd(-3, 3); m[k] = fx(mm[k]); end
      for (int k = 0; k < 3; k++) begin o[k] = rnd(-10, 10); d[k] = rnd(-1, 1); end
      ray_in.org = '{fx(o[0]), fx(o[1]), fx(o[2])};
      ray_in.dir = '{fx(d[0]), fx(d[1]), fx(d[2])};
      ray_in.inv = '0;
      for (int r = 0; r < 3; r++) begin
        eo[r] = mm[r*4]*o[0] + mm[r*4+1]*o[1] + mm[r*4+2]*o[2] + mm[r*4+3];
        ed[r] = mm[r*4]*d[0] + mm[r*4+1]*d[1] + mm[r*4+2]*d[2];
      end
      #1;
      near(ray_out.org.x, eo[0], 0.01, "org.x");
      near(ray_out.org.y, eo[1], 0.01, "org.y");
      near(ray_out.org.z, eo[2], 0.01, "org.z");
      near(ray_out.dir.x, ed[0], 0.01, "dir.x");
      near(ray_out.dir.y, ed[1], 0.01, "dir.y");
      near(ray_out.dir.z, ed[2], 0.01, "dir.z");
      if (ed[0] > 0.5 || ed[0] < -0.5) near(ray_out.inv.x, 1.0 / rl(ray_out.dir.x), 0.01, "inv.x");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
