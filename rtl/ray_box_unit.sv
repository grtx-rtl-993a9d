// ray_box_unit: ray versus axis-aligned bounding box (slab test).
//
// For each axis the distances to the two slab planes are
// (lo - org) * inv and (hi - org) * inv, where inv is the reciprocal of the
// ray direction held with the ray. The entry distance t_enter is the largest
// of the three near distances, the exit distance t_exit the smallest of the
// far ones, and the ray crosses the box when t_enter <= t_exit and t_exit >= 0.
// Interval limits (tmin, tmax) are applied afterwards by t_validation.
// Arithmetic is Q16.16 with 64-bit products, results saturated to 32 bits.
// The paper names the ray-box intersection unit but not its insides; the slab
// test is the usual method and this design's choice. Combinational; the
// ray tracing unit places BVH_WIDTH copies side by side so that all children
// of a BVH-6 node are tested in one cycle.
module ray_box_unit
  import grtx_pkg::*;
(
  input  ray_t  ray,
  input  aabb_t box,
  output logic  hit,
  output fx_t   t_enter,
  output fx_t   t_exit
);
  fx_t t0 [3];
  fx_t t1 [3];
  fx_t tn [3];
  fx_t tf [3];
  fx_t o  [3];
  fx_t iv [3];
  fx_t lo [3];
  fx_t hi [3];

  always_comb begin
    o  = '{ray.org.x, ray.org.y, ray.org.z};
    iv = '{ray.inv.x, ray.inv.y, ray.inv.z};
    lo = '{box.lo.x, box.lo.y, box.lo.z};
    hi = '{box.hi.x, box.hi.y, box.hi.z};
    for (int a = 0; a < 3; a++) begin
      t0[a] = fx_sat(fx_mul_wide(fx_t'(lo[a] - o[a]), iv[a]));
      t1[a] = fx_sat(fx_mul_wide(fx_t'(hi[a] - o[a]), iv[a]));
      tn[a] = (t0[a] < t1[a]) ? t0[a] : t1[a];
      tf[a] = (t0[a] < t1[a]) ? t1[a] : t0[a];
    end
    t_enter = tn[0];
    t_exit  = tf[0];
    for (int a = 1; a < 3; a++) begin
      if (tn[a] > t_enter) t_enter = tn[a];
      if (tf[a] < t_exit)  t_exit  = tf[a];
    end
    hit = (t_enter <= t_exit) && (t_exit >= 0);
  end
endmodule
