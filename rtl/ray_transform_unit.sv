// ray_transform_unit: moves a world-space ray into the object space of a
// Gaussian instance.
//
// At a TLAS leaf (instance) node the ray is multiplied by the node's 3x4
// world-to-object matrix: org' = A*org + b, dir' = A*dir, where A is the left
// 3x3 part and b the last column. Because dir is not renormalised, a distance
// t means the same point in both spaces, so t values found in the shared BLAS
// (the unit-sphere bounding mesh) are directly comparable with tmin/tmax.
// The reciprocal direction needed by the slab test is recomputed here.
// The paper states that the transform is done by the RT unit with the matrix
// in the TLAS leaf; the Q16.16 datapath is this design's choice.
// Combinational.
module ray_transform_unit
  import grtx_pkg::*;
(
  input  ray_t   ray_in,
  input  mat34_t m,
  output ray_t   ray_out
);
  function automatic fx_t row(input mat34_t mm, input int r, input vec3_t v, input logic point);
    logic signed [63:0] acc;
    acc = fx_mul_wide(mm[r*4+0], v.x) + fx_mul_wide(mm[r*4+1], v.y) + fx_mul_wide(mm[r*4+2], v.z);
    if (point) acc = acc + 64'(mm[r*4+3]);
    return fx_sat(acc);
  endfunction

  always_comb begin
    ray_out.org.x = row(m, 0, ray_in.org, 1'b1);
    ray_out.org.y = row(m, 1, ray_in.org, 1'b1);
    ray_out.org.z = row(m, 2, ray_in.org, 1'b1);
    ray_out.dir.x = row(m, 0, ray_in.dir, 1'b0);
    ray_out.dir.y = row(m, 1, ray_in.dir, 1'b0);
    ray_out.dir.z = row(m, 2, ray_in.dir, 1'b0);
    ray_out.inv.x = fx_recip(ray_out.dir.x);
    ray_out.inv.y = fx_recip(ray_out.dir.y);
    ray_out.inv.z = fx_recip(ray_out.dir.z);
  end
endmodule
