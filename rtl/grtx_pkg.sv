// grtx_pkg: types and constants shared by the ray tracing unit with
// traversal checkpointing and replay.
//
// Numbers: every coordinate, direction component and ray distance t is a
// signed 32-bit fixed-point value with 16 fraction bits (Q16.16). The 4-byte
// width of t follows the checkpoint and eviction entry formats (t_hit is 4 B);
// using fixed point instead of IEEE floats is this design's own choice, made
// to keep the arithmetic units small and exact to reason about. T_INF is the
// largest positive value and stands for an unbounded t_max.
//
// Addresses are 64 bits (node address 8 B, TLAS leaf address 8 B, as in the
// checkpoint entry). A checkpoint entry is 20 bytes: node address, TLAS leaf
// address (0 for a TLAS node) and t_hit. An eviction entry (primitive id and
// t_hit, 8 bytes) is written by the any-hit shader, not by this hardware.
//
// BVH node layout (this design's own; the paper only says the BVH is BVH-6):
// every node is one NODE_BITS-wide word, bits [1:0] give the node type.
//   NODE_INTERNAL : up to BVH_WIDTH children, child c at bit 2+c*CHILD_BITS:
//                   {valid(1), addr(64), lo x,y,z (3x32), hi x,y,z (3x32)}
//   NODE_INSTANCE : TLAS leaf. 3x4 world-to-object matrix m[r][c] at bit
//                   2+(r*4+c)*32, BLAS root address at bit 386, Gaussian
//                   (primitive) id at bit 450.
//   NODE_TRI      : BLAS leaf with one triangle, v0,v1,v2 (9x32) at bit 2.
package grtx_pkg;

  localparam int FX_W    = 32;
  localparam int FX_FRAC = 16;
  typedef logic signed [FX_W-1:0] fx_t;
  localparam fx_t T_INF  = 32'sh7FFF_FFFF;
  localparam fx_t FX_ONE = 32'sh0001_0000;

  localparam int ADDR_W = 64;
  typedef logic [ADDR_W-1:0] addr_t;

  localparam int PRIM_W = 32;
  typedef logic [PRIM_W-1:0] prim_t;

  typedef struct packed {
    fx_t x;
    fx_t y;
    fx_t z;
  } vec3_t;

  // A ray with its per-component reciprocal direction (used by the slab test).
  typedef struct packed {
    vec3_t org;
    vec3_t dir;
    vec3_t inv;
  } ray_t;

  typedef struct packed {
    vec3_t lo;
    vec3_t hi;
  } aabb_t;

  // Checkpoint buffer entry: 8 B node, 8 B TLAS leaf, 4 B t_hit = 20 B.
  localparam int CKPT_BYTES = 20;
  typedef struct packed {
    addr_t node;
    addr_t tlas_leaf;
    fx_t   thit;
  } ckpt_entry_t;
  localparam int CKPT_BITS = $bits(ckpt_entry_t);

  // Traversal stack entry: node address and the instance (TLAS leaf) whose
  // object space the node lives in; inst == 0 marks a TLAS node.
  typedef struct packed {
    addr_t node;
    addr_t inst;
  } stack_entry_t;

  // Node word.
  localparam int BVH_WIDTH  = 6;
  localparam int CHILD_BITS = 1 + ADDR_W + 6 * FX_W;       // 257
  localparam int NODE_BITS  = 2 + BVH_WIDTH * CHILD_BITS;  // 1544

  typedef enum logic [1:0] {
    NODE_INTERNAL = 2'd0,
    NODE_INSTANCE = 2'd1,
    NODE_TRI      = 2'd2,
    NODE_EMPTY    = 2'd3
  } node_type_e;

  typedef logic [NODE_BITS-1:0] node_word_t;

  typedef struct packed {
    logic  valid;
    addr_t addr;
    aabb_t box;
  } child_t;

  // 3x4 affine matrix, element (r,c) at index r*4+c:
  // p_obj = M[:,0:2] * p_world + M[:,3].
  typedef fx_t [11:0] mat34_t;

  function automatic node_type_e node_type(input node_word_t w);
    return node_type_e'(w[1:0]);
  endfunction

  function automatic child_t node_child(input node_word_t w, input int c);
    logic [CHILD_BITS-1:0] b;
    b = w[2 + c * CHILD_BITS +: CHILD_BITS];
    return child_t'(b);
  endfunction

  function automatic fx_t node_mat(input node_word_t w, input int r, input int c);
    return fx_t'(w[2 + (r * 4 + c) * FX_W +: FX_W]);
  endfunction

  function automatic addr_t node_blas_root(input node_word_t w);
    return w[386 +: ADDR_W];
  endfunction

  function automatic prim_t node_prim_id(input node_word_t w);
    return w[450 +: PRIM_W];
  endfunction

  function automatic vec3_t node_vertex(input node_word_t w, input int v);
    return vec3_t'(w[2 + v * 3 * FX_W +: 3 * FX_W]);
  endfunction

  // Q16.16 multiply, result kept at 64 bits (Q48.16) so that callers can sum
  // several products before saturating.
  function automatic logic signed [63:0] fx_mul_wide(input fx_t a, input fx_t b);
    logic signed [63:0] p;
    p = 64'(a) * 64'(b);
    return p >>> FX_FRAC;
  endfunction

  function automatic fx_t fx_sat(input logic signed [63:0] v);
    if (v > 64'sh0000_0000_7FFF_FFFF) return T_INF;
    if (v < -64'sh0000_0000_7FFF_FFFF) return -T_INF;
    return fx_t'(v[31:0]);
  endfunction

  function automatic fx_t fx_mul(input fx_t a, input fx_t b);
    return fx_sat(fx_mul_wide(a, b));
  endfunction

  // Ray status kept in the warp buffer.
  typedef enum logic [2:0] {
    RS_IDLE  = 3'd0,   // slot unused or thread inactive in this launch
    RS_READY = 3'd1,   // may be picked by the scheduler
    RS_WAIT  = 3'd2,   // memory request outstanding
    RS_AHIT  = 3'd3,   // primitive hit recorded, waiting for the any-hit shader
    RS_DONE  = 3'd4    // traversal of this round finished (terminated)
  } ray_state_e;

  localparam int SP_W = 8;

  // Per-ray warp buffer record (the traversal stack is kept beside it).
  typedef struct packed {
    ray_state_e  state;
    logic        replay;      // replay flag: resume from checkpoint source
    logic [31:0] ray_id;
    ray_t        wray;        // world-space ray
    ray_t        oray;        // ray in the object space of cur_inst
    fx_t         tmin;
    fx_t         tmax;
    addr_t       cur_inst;    // TLAS leaf whose transform oray holds
    prim_t       cur_prim;    // Gaussian id of cur_inst
    addr_t       fetch_inst;  // instance of the node being fetched
    logic [15:0] src_off;     // checkpoint source offset (2 B)
    logic [15:0] dst_off;     // checkpoint destination offset (2 B)
    logic        ovf;         // destination full: restart-from-root written
    fx_t         hit_t;       // hit waiting for the any-hit shader
    prim_t       hit_prim;
    logic [SP_W-1:0] sp;      // traversal stack depth
  } ray_rec_t;

  function automatic fx_t fx_recip(input fx_t d);
    logic [63:0] mag;
    logic [63:0] q;
    if (d == '0) return T_INF;
    mag = d[FX_W-1] ? 64'(-64'(d)) : 64'(d);
    q = 64'h0000_0001_0000_0000 / mag;
    if (q > 64'h0000_0000_7FFF_FFFF) q = 64'h0000_0000_7FFF_FFFF;
    return d[FX_W-1] ? -fx_t'(q[31:0]) : fx_t'(q[31:0]);
  endfunction

  // Memory request and response.
  typedef enum logic [1:0] {
    TAG_NODE  = 2'd0,   // node fetch to be processed as a traversal step
    TAG_INST  = 2'd1,   // TLAS leaf fetch only to transform the ray
    TAG_CKPT  = 2'd2,   // checkpoint source entry read
    TAG_WRITE = 2'd3    // write, no response
  } mem_kind_e;

  typedef struct packed {
    mem_kind_e kind;
    logic [7:0] ray;    // warp * THREADS + thread
    addr_t      addr;
    logic [CKPT_BITS-1:0] wdata;
  } mem_req_t;

  typedef struct packed {
    mem_kind_e  kind;
    logic [7:0] ray;
    addr_t      addr;
    node_word_t data;   // checkpoint reads return the entry in the low bits
  } mem_resp_t;

endpackage
