// ray_tri_unit: ray versus triangle intersection (Moller-Trumbore form).
//
// With e1 = v1 - v0, e2 = v2 - v0, p = dir x e2, s = org - v0, q = s x e1:
//   det = e1.p, u = s.p, v = dir.q, t = (e2.q) / det.
// The ray hits when det > 0, u >= 0, v >= 0 and u + v <= det; the barycentric
// tests are done on the undivided numerators so the only division is the one
// for t. Triangles seen from behind (det <= 0) are culled when CULL_BACKFACE
// is set, so a ray crossing a closed bounding mesh around a Gaussian reports
// it once, at its front face. The paper names the ray-triangle unit without
// its insides; the method, the culling and the Q16.16 arithmetic are this
// design's choices. Combinational.
module ray_tri_unit
  import grtx_pkg::*;
#(
  parameter bit CULL_BACKFACE = 1'b1
) (
  input  ray_t  ray,
  input  vec3_t v0,
  input  vec3_t v1,
  input  vec3_t v2,
  output logic  hit,
  output fx_t   t_hit
);
  typedef logic signed [63:0] w_t;

  function automatic w_t dot3(input vec3_t a, input vec3_t b);
    return fx_mul_wide(a.x, b.x) + fx_mul_wide(a.y, b.y) + fx_mul_wide(a.z, b.z);
  endfunction

  function automatic vec3_t cross3(input vec3_t a, input vec3_t b);
    vec3_t r;
    r.x = fx_sat(fx_mul_wide(a.y, b.z) - fx_mul_wide(a.z, b.y));
    r.y = fx_sat(fx_mul_wide(a.z, b.x) - fx_mul_wide(a.x, b.z));
    r.z = fx_sat(fx_mul_wide(a.x, b.y) - fx_mul_wide(a.y, b.x));
    return r;
  endfunction

  function automatic vec3_t sub3(input vec3_t a, input vec3_t b);
    vec3_t r;
    r.x = a.x - b.x;
    r.y = a.y - b.y;
    r.z = a.z - b.z;
    return r;
  endfunction

  vec3_t e1, e2, p, s, q;
  w_t    det, u, v, tnum, adet, anum;
  logic [95:0] quo;

  always_comb begin
    e1   = sub3(v1, v0);
    e2   = sub3(v2, v0);
    p    = cross3(ray.dir, e2);
    det  = dot3(e1, p);
    s    = sub3(ray.org, v0);
    q    = cross3(s, e1);
    u    = dot3(s, p);
    v    = dot3(ray.dir, q);
    tnum = dot3(e2, q);
    // Without culling a back face is handled by flipping all signs.
    if (!CULL_BACKFACE && det < 0) begin
      det  = -det;
      u    = -u;
      v    = -v;
      tnum = -tnum;
    end
    hit  = (det > 0) && (u >= 0) && (v >= 0) && (u + v <= det);
    adet = (det < 0) ? -det : det;
    anum = (tnum < 0) ? -tnum : tnum;
    quo  = (adet == 0) ? '0 : ({32'd0, anum} << FX_FRAC) / {32'd0, adet};
    if (quo > 96'h7FFF_FFFF) t_hit = T_INF;
    else                     t_hit = fx_t'(quo[31:0]);
    if (tnum < 0) t_hit = -t_hit;
  end
endmodule
