// t_validation: the t-value validation unit of the ray tracing unit.
//
// It decides what happens to an intersection reported by the ray-box or the
// ray-triangle unit. A hit counts only if its distance lies inside the ray's
// current interval, tmin < t_hit <= tmax (the paper's rule). For a box the
// unit receives the entry distance t_enter and the exit distance t_exit; for
// a triangle both are the same t_hit.
//   pass : geometric hit, t_exit > tmin and t_enter <= tmax. The box child is
//          pushed on the traversal stack, or the primitive goes to the any-hit
//          shader.
//   ckpt : geometric hit, t_exit > tmin but t_enter > tmax. The node lies
//          beyond the k closest Gaussians of this round; following the paper
//          it is written to the checkpoint destination buffer instead of
//          being dropped.
// Anything else (no geometric hit, or wholly before tmin) is discarded.
// Using t_exit against tmin for boxes is this design's choice: a box that the
// ray is still inside at tmin may hold primitives beyond tmin.
// Purely combinational.
module t_validation
  import grtx_pkg::*;
(
  input  logic hit,
  input  fx_t  t_enter,
  input  fx_t  t_exit,
  input  fx_t  tmin,
  input  fx_t  tmax,
  output logic pass,
  output logic ckpt
);
  logic in_front;
  always_comb begin
    in_front = hit && (t_exit > tmin);
    pass     = in_front && (t_enter <= tmax);
    ckpt     = in_front && (t_enter > tmax);
  end
endmodule
