// tb_ray_box_unit: random rays against random boxes, compared with a slab
// test computed in real arithmetic. Cases within 0.01 of a decision
// boundary are skipped for the hit flag; entry/exit distances must agree to
// within 0.01 on hits.
module tb_ray_box_unit;
  import grtx_pkg::*;
  ray_t ray;
  aabb_t box;
  logic hit;
  fx_t t_enter, t_exit;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  ray_box_unit dut (.*);

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
    int hits = 0;
    for (int i = 0; i < 4000; i++) begin
      real o[3], d[3], lo[3], hi[3], inv[3], tn, tf, a, b;
      for (int k = 0; k < 3; k++) begin
        o[k] = rnd(-5, 5);
        d[k] = rnd(-1, 1);
        if (d[k] > -0.05 && d[k] < 0.05) d[k] = 0.5;
        lo[k] = rnd(-4, 3);
        hi[k] = lo[k] + rnd(0.2, 3);
      end
      ray.org = '{fx(o[0]), fx(o[1]), fx(o[2])};
      ray.dir = '{fx(d[0]), fx(d[1]), fx(d[2])};
      ray.inv = '{fx_recip(ray.dir.x), fx_recip(ray.dir.y), fx_recip(ray.dir.z)};
      box.lo = '{fx(lo[0]), fx(lo[1]), fx(lo[2])};
      box.hi = '{fx(hi[0]), fx(hi[1]), fx(hi[2])};
      tn = -1e9; tf = 1e9;
      for (int k = 0; k < 3; k++) begin
        inv[k] = 1.0 / d[k];
        a = (lo[k] - o[k]) * inv[k];
        b = (hi[k] - o[k]) * inv[k];
        if (a > b) begin real t; t = a; a = b; b = t; end
        if (a > tn) tn = a;
        if (b < tf) tf = b;
      end
      #1;
      if ((tf - tn > 0.01 || tf - tn < -0.01) && (tf > 0.01 || tf < -0.01)) begin
        logic eh;
        eh = (tn <= tf) && (tf >= 0);
        checks++;
        if (hit !== eh) begin
          failures++;
          $display("FAIL hit=%0b expected %0b tn=%f tf=%f", hit, eh, tn, tf);
        end else if (eh) begin
          hits++;
          checks++;
          if (rl(t_enter) - tn > 0.01 || tn - rl(t_enter) > 0.01 ||
              rl(t_exit) - tf > 0.01 || tf - rl(t_exit) > 0.01) begin
            failures++;
            $display("FAIL t %f %f expected %f %f", rl(t_enter), rl(t_exit), tn, tf);
          end
        end
      end
    end
    checks++;
    if (hits < 100) begin failures++; $display("FAIL too few hits %0d", hits); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
