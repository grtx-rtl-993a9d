// rt_unit: ray tracing unit of one streaming multiprocessor, extended with
// traversal checkpointing and replay for multi-round Gaussian ray tracing.
//
// What it does. A warp hands its rays to the unit (one launch beat per
// thread). Each ray walks a two-level BVH: a TLAS whose leaves are Gaussian
// instances (a 3x4 world-to-object matrix and a pointer to one BLAS shared by
// all Gaussians: a bounding mesh around the unit sphere) and that shared
// BLAS. Every primitive hit whose distance lies in (tmin, tmax] is handed to
// the any-hit shader, which answers "ignore" (keep tmax) or "report" (tmax
// becomes the hit's t). A round ends for a ray when nothing is left to visit;
// the warp retires when all its rays have ended.
//
// Checkpointing. A node or primitive that the ray does cross but only beyond
// tmax is not simply dropped: its address, the TLAS leaf it belongs to (0 for
// a TLAS node) and its entry distance are written as a 20-byte entry to the
// ray's part of the checkpoint destination buffer in memory
//   dst_addr + (ray_id * max_size + dst_off) * 20,  dst_off += 1.
// When a ray's round ends an all-zero terminator entry is written after the
// last one. In the next round the warp is launched with the replay flag set:
// the ray does not start at the TLAS root but reads the source buffer entries
// (src_off += 1 per read) and traverses the subtree of each in turn. An entry
// whose stored distance already exceeds the current tmax is copied straight
// to the new destination buffer without being fetched. The caller swaps the
// source and destination addresses between rounds (ping-pong). If a ray's
// destination area fills up, its entries are replaced by a single entry for
// the TLAS root, so the next round restarts from the root, as a unit without
// checkpointing would. Software must then discard that ray's eviction buffer
// (it sees the root as the first source entry), because a full traversal
// finds those Gaussians again. A max_size of 0 turns checkpointing
// off entirely (the baseline unit: nodes beyond tmax are dropped).
//
// Structure. Three stages share the warp buffer:
//   issue    : the scheduler picks a ready ray; the unit pops its stack top
//              and fetches the node (or first fetches the TLAS leaf when the
//              node is in a different instance than the ray's current object
//              space, or reads the next checkpoint source entry when the
//              stack is empty in replay mode, or ends the round).
//   response : the head of the memory response queue is processed: all
//              BVH_WIDTH child boxes tested at once and validated against
//              (tmin, tmax]; passing children pushed nearest-on-top, failing ones
//              checkpointed (one memory write per cycle); TLAS leaves
//              transform the ray; triangle hits are parked for the any-hit
//              shader.
//   any-hit  : when all rays of a warp that are still traversing wait with a
//              hit, or a warp has waited ANYHIT_TIMEOUT cycles, its hits are
//              handed one by one to the any-hit shader interface.
// Node fetches, checkpoint reads and checkpoint writes all go through the
// memory request queue in order; node data returns through the memory
// response queue, tagged with the ray index (any order).
//
// From the paper: warp buffer fields and size, the unit-wide checkpoint
// buffer info (source address, destination address, max size), the hit rule
// tmin < t_hit <= tmax, checkpointing of nodes failing the tmax test, entry
// format, per-ray offsets that increment, ping-pong buffers, any-hit
// invocation on "all active rays hit or timeout", instance transform at TLAS
// leaves, BVH-6. This design's own: node format, Q16.16 arithmetic, the
// terminator entry, overflow handling, the serial any-hit handshake, the
// one-ray-per-cycle pipeline and all queue depths.
//
// Interfaces (all valid/ready handshakes complete on a cycle with both high):
//   launch_*  : one beat per thread of a warp, launch_last on the final one.
//   retire_*  : a warp whose rays have all ended.
//   ahit_req_*/ahit_resp_* : one hit at a time to the any-hit shader; the
//               response (report or ignore) may come any cycle later.
//   mem_req_* / mem_resp_* : to and from the L1 / memory system. Reads return
//               a whole node word (checkpoint reads: entry in the low bits).
// Reset is asynchronous and active low. The queues' count outputs are left
// open on purpose, and rst_n also appears in the assertions' disable iff;
// lint tools may remark on both, but neither affects the circuit.
module rt_unit
  import grtx_pkg::*;
#(
  parameter int NUM_WARPS      = 8,
  parameter int THREADS        = 32,
  parameter int STACK_DEPTH    = 32,
  parameter int REQ_DEPTH      = 16,
  parameter int RESP_DEPTH     = 16,
  parameter int ANYHIT_TIMEOUT = 64
) (
  input  logic clk,
  input  logic rst_n,

  input  addr_t       tlas_root,
  input  logic        cfg_we,
  input  addr_t       cfg_src_addr,
  input  addr_t       cfg_dst_addr,
  input  logic [15:0] cfg_max_size,

  input  logic        launch_valid,
  output logic        launch_ready,
  input  logic [$clog2(NUM_WARPS)-1:0] launch_warp,
  input  logic [$clog2(THREADS)-1:0]   launch_thread,
  input  logic        launch_last,
  input  logic        launch_active,
  input  logic        launch_replay,
  input  logic [31:0] launch_ray_id,
  input  vec3_t       launch_org,
  input  vec3_t       launch_dir,
  input  fx_t         launch_tmin,
  input  fx_t         launch_tmax,

  output logic        retire_valid,
  input  logic        retire_ready,
  output logic [$clog2(NUM_WARPS)-1:0] retire_warp,

  output logic        ahit_req_valid,
  input  logic        ahit_req_ready,
  output logic [$clog2(NUM_WARPS)-1:0] ahit_req_warp,
  output logic [$clog2(THREADS)-1:0]   ahit_req_thread,
  output logic [31:0] ahit_req_ray_id,
  output prim_t       ahit_req_prim,
  output fx_t         ahit_req_thit,
  input  logic        ahit_resp_valid,
  input  logic        ahit_resp_report,

  output logic        mem_req_valid,
  input  logic        mem_req_ready,
  output mem_req_t    mem_req,
  input  logic        mem_resp_valid,
  output logic        mem_resp_ready,
  input  mem_resp_t   mem_resp,

  output logic [31:0] stat_node_fetch,
  output logic [31:0] stat_ckpt_write,
  output logic [31:0] stat_ckpt_read,
  output logic [31:0] stat_anyhit,
  output logic [31:0] stat_ckpt_ovf,
  output logic [31:0] stat_timeout,
  output logic        stack_ovf
);
  localparam int NR   = NUM_WARPS * THREADS;
  localparam int RW   = $clog2(NR);
  localparam int WW   = $clog2(NUM_WARPS);
  localparam int TW   = $clog2(THREADS);
  localparam int PNW  = $clog2(BVH_WIDTH + 1);
  localparam int TMW  = $clog2(ANYHIT_TIMEOUT + 1);

  if (RW > 8) begin : g_too_many_rays
    $error("rt_unit: at most 256 rays fit the 8-bit memory tag");
  end

  // ------------------------------------------------------------------
  // Warp buffer
  // ------------------------------------------------------------------
  logic [RW-1:0]  rd_idx   [3];
  ray_rec_t       rd_rec   [3];
  stack_entry_t   rd_top   [3];
  logic           wr_en    [3];
  logic [RW-1:0]  wr_idx   [3];
  ray_rec_t       wr_rec   [3];
  logic [SP_W-1:0] push_base [3];
  logic [PNW-1:0] push_n   [3];
  stack_entry_t   push_ent [3][BVH_WIDTH];
  ray_state_e     state    [NR];
  addr_t          src_addr, dst_addr;
  logic [15:0]    max_size;

  warp_buffer #(
    .NUM_WARPS(NUM_WARPS), .THREADS(THREADS), .STACK_DEPTH(STACK_DEPTH),
    .NRP(3), .NWP(3)
  ) u_wb (
    .clk, .rst_n,
    .rd_idx, .rd_rec, .rd_top,
    .wr_en, .wr_idx, .wr_rec, .push_base, .push_n, .push_ent,
    .state,
    .cfg_we, .cfg_src_addr, .cfg_dst_addr, .cfg_max_size,
    .ckpt_src_addr(src_addr), .ckpt_dst_addr(dst_addr), .ckpt_max_size(max_size),
    .stack_ovf
  );

  logic ckpt_en;
  assign ckpt_en = (max_size != '0);

  function automatic addr_t ckpt_addr(input addr_t base, input logic [31:0] id,
                                      input logic [15:0] msz, input logic [15:0] off);
    logic [63:0] idx;
    idx = 64'(id) * 64'(msz) + 64'(off);
    return base + (idx << 4) + (idx << 2);   // * 20 bytes
  endfunction

  // ------------------------------------------------------------------
  // Memory queues
  // ------------------------------------------------------------------
  logic     rq_in_valid, rq_in_ready;
  mem_req_t rq_in;
  logic     sq_out_valid, sq_out_ready;
  mem_resp_t rsp;

  sync_fifo #(.T(mem_req_t), .DEPTH(REQ_DEPTH)) u_req_q (
    .clk, .rst_n,
    .in_valid(rq_in_valid), .in_ready(rq_in_ready), .in_data(rq_in),
    .out_valid(mem_req_valid), .out_ready(mem_req_ready), .out_data(mem_req),
    .count()
  );

  sync_fifo #(.T(mem_resp_t), .DEPTH(RESP_DEPTH)) u_resp_q (
    .clk, .rst_n,
    .in_valid(mem_resp_valid), .in_ready(mem_resp_ready), .in_data(mem_resp),
    .out_valid(sq_out_valid), .out_ready(sq_out_ready), .out_data(rsp),
    .count()
  );

  // ------------------------------------------------------------------
  // Warp-level bookkeeping
  // ------------------------------------------------------------------
  logic [NUM_WARPS-1:0] warp_valid;
  logic [NUM_WARPS-1:0] has_ahit, all_wait, all_done;
  logic [NR-1:0]        ready_vec;

  always_comb begin
    for (int w = 0; w < NUM_WARPS; w++) begin
      has_ahit[w] = 1'b0;
      all_wait[w] = 1'b1;
      all_done[w] = 1'b1;
      for (int t = 0; t < THREADS; t++) begin
        ray_state_e s;
        s = state[w*THREADS + t];
        if (s == RS_AHIT) has_ahit[w] = 1'b1;
        if (s == RS_READY || s == RS_WAIT) all_wait[w] = 1'b0;
        if (s != RS_IDLE && s != RS_DONE) all_done[w] = 1'b0;
        ready_vec[w*THREADS + t] = warp_valid[w] && (s == RS_READY);
      end
    end
  end

  // ------------------------------------------------------------------
  // Response stage: fixed-function units
  // ------------------------------------------------------------------
  ray_rec_t   r1;
  ray_t       sel_ray, xray;
  node_type_e ntype;
  child_t     ch      [BVH_WIDTH];
  logic       bx_hit  [BVH_WIDTH];
  fx_t        bx_te   [BVH_WIDTH];
  fx_t        bx_tx   [BVH_WIDTH];
  logic       bx_pass [BVH_WIDTH];
  logic       bx_ckpt [BVH_WIDTH];
  logic       tri_hit, tri_pass, tri_ckpt;
  fx_t        tri_t;
  ckpt_entry_t ce;
  mat34_t     mtx;

  assign r1      = rd_rec[1];
  assign ntype   = node_type(rsp.data);
  assign sel_ray = (r1.fetch_inst == '0) ? r1.wray : r1.oray;
  assign ce      = ckpt_entry_t'(rsp.data[CKPT_BITS-1:0]);

  always_comb
    for (int i = 0; i < 12; i++) mtx[i] = node_mat(rsp.data, i / 4, i % 4);

  for (genvar c = 0; c < BVH_WIDTH; c++) begin : g_box
    assign ch[c] = node_child(rsp.data, c);
    ray_box_unit u_box (
      .ray(sel_ray), .box(ch[c].box),
      .hit(bx_hit[c]), .t_enter(bx_te[c]), .t_exit(bx_tx[c])
    );
    t_validation u_tv (
      .hit(bx_hit[c] && ch[c].valid), .t_enter(bx_te[c]), .t_exit(bx_tx[c]),
      .tmin(r1.tmin), .tmax(r1.tmax), .pass(bx_pass[c]), .ckpt(bx_ckpt[c])
    );
  end

  ray_tri_unit #(.CULL_BACKFACE(1'b1)) u_tri (
    .ray(r1.oray),
    .v0(node_vertex(rsp.data, 0)), .v1(node_vertex(rsp.data, 1)), .v2(node_vertex(rsp.data, 2)),
    .hit(tri_hit), .t_hit(tri_t)
  );

  t_validation u_tv_tri (
    .hit(tri_hit), .t_enter(tri_t), .t_exit(tri_t),
    .tmin(r1.tmin), .tmax(r1.tmax), .pass(tri_pass), .ckpt(tri_ckpt)
  );

  ray_transform_unit u_xf (.ray_in(r1.wray), .m(mtx), .ray_out(xray));

  // Stack order of the passing children (see NODE_INTERNAL below).
  logic [PNW-1:0] bx_rank [BVH_WIDTH];
  always_comb
    for (int c = 0; c < BVH_WIDTH; c++) begin
      bx_rank[c] = '0;
      for (int j = 0; j < BVH_WIDTH; j++)
        if (j != c && bx_pass[j] &&
            (bx_te[j] > bx_te[c] || (bx_te[j] == bx_te[c] && j > c)))
          bx_rank[c] = bx_rank[c] + 1'b1;
    end

  // Checkpoint candidates of the response at the head of the queue.
  logic [BVH_WIDTH-1:0] ck_need, ck_done, ck_pend;
  ckpt_entry_t          ck_ent [BVH_WIDTH];

  always_comb begin
    ck_need = '0;
    for (int c = 0; c < BVH_WIDTH; c++) ck_ent[c] = '0;
    if (rsp.kind == TAG_NODE && ntype == NODE_INTERNAL) begin
      for (int c = 0; c < BVH_WIDTH; c++) begin
        ck_need[c] = bx_ckpt[c];
        ck_ent[c]  = '{node: ch[c].addr, tlas_leaf: r1.fetch_inst, thit: bx_te[c]};
      end
    end else if (rsp.kind == TAG_NODE && ntype == NODE_TRI) begin
      ck_need[0] = tri_ckpt;
      ck_ent[0]  = '{node: rsp.addr, tlas_leaf: r1.fetch_inst, thit: tri_t};
    end else if (rsp.kind == TAG_CKPT) begin
      ck_need[0] = (ce.node != '0) && (ce.thit > r1.tmax);
      ck_ent[0]  = ce;
    end
    ck_pend = (ckpt_en && !r1.ovf) ? (ck_need & ~ck_done) : '0;
  end

  // ------------------------------------------------------------------
  // Response stage control
  // ------------------------------------------------------------------
  logic    rsp_wr_req;     // response stage wants the request queue
  logic    rsp_finish;     // response fully handled this cycle
  logic    rsp_go;
  logic [$clog2(BVH_WIDTH)-1:0] ck_sel;
  logic    ck_overflow;
  mem_req_t rsp_req;
  ray_rec_t rsp_rec;
  logic [PNW-1:0] rsp_push_n;
  stack_entry_t   rsp_push [BVH_WIDTH];

  always_comb begin
    ck_sel = '0;
    for (int c = BVH_WIDTH - 1; c >= 0; c--) if (ck_pend[c]) ck_sel = $clog2(BVH_WIDTH)'(c);
    rsp_wr_req  = sq_out_valid && (ck_pend != '0);
    ck_overflow = (32'(r1.dst_off) + 2 > 32'(max_size));
    rsp_req = '0;
    rsp_req.kind = TAG_WRITE;
    rsp_req.ray  = 8'(rsp.ray);
    if (ck_overflow) begin
      rsp_req.addr  = ckpt_addr(dst_addr, r1.ray_id, max_size, 16'd0);
      rsp_req.wdata = {tlas_root, {(ADDR_W + FX_W){1'b0}}};
    end else begin
      rsp_req.addr  = ckpt_addr(dst_addr, r1.ray_id, max_size, r1.dst_off);
      rsp_req.wdata = CKPT_BITS'(ck_ent[ck_sel]);
    end
    // The stage progresses unless it must write and the queue is full.
    rsp_go     = sq_out_valid && (!rsp_wr_req || rq_in_ready);
    rsp_finish = rsp_go && (!rsp_wr_req || ck_overflow ||
                            ((ck_pend & ~(BVH_WIDTH'(1) << ck_sel)) == '0));

    rsp_rec    = r1;
    rsp_push_n = '0;
    for (int c = 0; c < BVH_WIDTH; c++) rsp_push[c] = '0;
    if (rsp_wr_req) begin
      if (ck_overflow) begin
        rsp_rec.ovf     = 1'b1;
        rsp_rec.dst_off = 16'd1;
      end else begin
        rsp_rec.dst_off = r1.dst_off + 16'd1;
      end
    end
    if (rsp_finish) begin
      rsp_rec.state = RS_READY;
      unique case (rsp.kind)
        TAG_NODE: begin
          unique case (ntype)
            NODE_INTERNAL: begin
              // Front-to-back: a child's slot is the number of passing
              // children farther than it, so the nearest ends on top.
              for (int c = 0; c < BVH_WIDTH; c++)
                if (bx_pass[c]) begin
                  rsp_push[bx_rank[c]] = '{node: ch[c].addr, inst: r1.fetch_inst};
                  rsp_push_n = rsp_push_n + 1'b1;
                end
            end
            NODE_INSTANCE: begin
              rsp_rec.oray     = xray;
              rsp_rec.cur_inst = rsp.addr;
              rsp_rec.cur_prim = node_prim_id(rsp.data);
              rsp_push[0]      = '{node: node_blas_root(rsp.data), inst: rsp.addr};
              rsp_push_n       = PNW'(1);
            end
            NODE_TRI: begin
              if (tri_pass) begin
                rsp_rec.state    = RS_AHIT;
                rsp_rec.hit_t    = tri_t;
                rsp_rec.hit_prim = r1.cur_prim;
              end
            end
            default: ;
          endcase
        end
        TAG_INST: begin
          rsp_rec.oray     = xray;
          rsp_rec.cur_inst = rsp.addr;
          rsp_rec.cur_prim = node_prim_id(rsp.data);
        end
        TAG_CKPT: begin
          if (ce.node == '0)
            rsp_rec.replay = 1'b0;           // source exhausted
          else if (ce.thit <= r1.tmax) begin
            rsp_push[0] = '{node: ce.node, inst: ce.tlas_leaf};
            rsp_push_n  = PNW'(1);
          end
        end
        default: ;
      endcase
      if (32'(r1.sp) + 32'(rsp_push_n) > STACK_DEPTH) rsp_rec.sp = SP_W'(STACK_DEPTH);
      else rsp_rec.sp = r1.sp + SP_W'(rsp_push_n);
    end
  end

  assign sq_out_ready = rsp_finish;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ck_done <= '0;
    else if (rsp_finish) ck_done <= '0;
    else if (rsp_go && rsp_wr_req) ck_done <= ck_done | (BVH_WIDTH'(1) << ck_sel);
  end

  // ------------------------------------------------------------------
  // Issue stage
  // ------------------------------------------------------------------
  logic          iss_go;
  logic          gnt_valid;
  logic [WW-1:0] gnt_warp;
  logic [TW-1:0] gnt_thread;
  ray_rec_t      r0, iss_rec;
  stack_entry_t  top0;
  mem_req_t      iss_req;
  logic          iss_node, iss_ckrd;

  rt_scheduler #(.NUM_WARPS(NUM_WARPS), .THREADS(THREADS)) u_sched (
    .clk, .rst_n,
    .en(rq_in_ready),
    .take(iss_go),
    .ready(ready_vec),
    .gnt_valid, .gnt_warp, .gnt_thread
  );

  assign r0   = rd_rec[0];
  assign top0 = rd_top[0];

  always_comb begin
    iss_rec  = r0;
    iss_req  = '0;
    iss_req.ray = 8'({gnt_warp, gnt_thread});
    iss_node = 1'b0;
    iss_ckrd = 1'b0;
    iss_rec.state = RS_WAIT;
    if (r0.sp != '0) begin
      iss_node = 1'b1;
      if (top0.inst != '0 && top0.inst != r0.cur_inst) begin
        iss_req.kind = TAG_INST;
        iss_req.addr = top0.inst;
      end else begin
        iss_req.kind       = TAG_NODE;
        iss_req.addr       = top0.node;
        iss_rec.sp         = r0.sp - 1'b1;
        iss_rec.fetch_inst = top0.inst;
      end
    end else if (r0.replay && r0.src_off < max_size) begin
      iss_ckrd        = 1'b1;
      iss_req.kind    = TAG_CKPT;
      iss_req.addr    = ckpt_addr(src_addr, r0.ray_id, max_size, r0.src_off);
      iss_rec.src_off = r0.src_off + 16'd1;
    end else begin
      // Round over for this ray: terminate its destination list.
      iss_req.kind  = TAG_WRITE;
      iss_req.addr  = ckpt_addr(dst_addr, r0.ray_id, max_size, r0.dst_off);
      iss_req.wdata = '0;
      iss_rec.state = RS_DONE;
    end
  end

  logic iss_mem;
  assign iss_go  = gnt_valid && !rsp_wr_req;
  // With checkpointing off no terminator is written.
  assign iss_mem = iss_go && (iss_req.kind != TAG_WRITE || ckpt_en);

  assign rq_in_valid = rsp_wr_req ? rsp_go : iss_mem;
  assign rq_in       = rsp_wr_req ? rsp_req : iss_req;

  // ------------------------------------------------------------------
  // Any-hit invocation and launch (share warp buffer port 2)
  // ------------------------------------------------------------------
  logic          ah_active, ah_pending;
  logic [WW-1:0] ah_warp;
  logic [TW-1:0] ah_thread_q, ah_cand;
  logic          ah_cand_valid;
  logic [TMW-1:0] tmo [NUM_WARPS];
  logic          ah_start;
  logic [WW-1:0] ah_start_warp;
  logic          ah_start_tmo;

  always_comb begin
    ah_cand_valid = 1'b0;
    ah_cand       = '0;
    for (int t = THREADS - 1; t >= 0; t--)
      if (state[int'(ah_warp)*THREADS + t] == RS_AHIT) begin
        ah_cand_valid = 1'b1;
        ah_cand       = TW'(t);
      end
    ah_start      = 1'b0;
    ah_start_warp = '0;
    ah_start_tmo  = 1'b0;
    for (int w = NUM_WARPS - 1; w >= 0; w--)
      if (!ah_active && warp_valid[w] && has_ahit[w] &&
          (all_wait[w] || int'(tmo[w]) >= ANYHIT_TIMEOUT)) begin
        ah_start      = 1'b1;
        ah_start_warp = WW'(w);
        ah_start_tmo  = !all_wait[w];
      end
  end

  assign ahit_req_valid  = ah_active && !ah_pending && ah_cand_valid;
  assign ahit_req_warp   = ah_warp;
  assign ahit_req_thread = ah_cand;
  assign ahit_req_ray_id = rd_rec[2].ray_id;
  assign ahit_req_prim   = rd_rec[2].hit_prim;
  assign ahit_req_thit   = rd_rec[2].hit_t;

  logic ah_wr;
  assign ah_wr = ah_pending && ahit_resp_valid;

  assign launch_ready = !ah_wr && !warp_valid[launch_warp];
  logic launch_go;
  assign launch_go = launch_valid && launch_ready;

  ray_rec_t      lrec, ah_rec;
  always_comb begin
    lrec          = '0;
    lrec.state    = launch_active ? RS_READY : RS_IDLE;
    lrec.replay   = launch_replay;
    lrec.ray_id   = launch_ray_id;
    lrec.wray.org = launch_org;
    lrec.wray.dir = launch_dir;
    lrec.wray.inv = '{x: fx_recip(launch_dir.x), y: fx_recip(launch_dir.y), z: fx_recip(launch_dir.z)};
    lrec.oray     = lrec.wray;
    lrec.tmin     = launch_tmin;
    lrec.tmax     = launch_tmax;
    lrec.sp       = launch_replay ? '0 : SP_W'(1);

    ah_rec = rd_rec[2];
    ah_rec.state = RS_READY;
    if (ahit_resp_report) ah_rec.tmax = rd_rec[2].hit_t;
  end

  // ------------------------------------------------------------------
  // Warp buffer port wiring
  // ------------------------------------------------------------------
  always_comb begin
    rd_idx[0] = RW'({gnt_warp, gnt_thread});
    rd_idx[1] = RW'(rsp.ray);
    rd_idx[2] = RW'({ah_warp, ah_pending ? ah_thread_q : ah_cand});

    for (int p = 0; p < 3; p++) begin
      wr_en[p] = 1'b0;
      wr_idx[p] = rd_idx[p];
      wr_rec[p] = '0;
      push_base[p] = '0;
      push_n[p] = '0;
      for (int j = 0; j < BVH_WIDTH; j++) push_ent[p][j] = '0;
    end

    wr_en[0]  = iss_go;
    wr_rec[0] = iss_rec;

    wr_en[1]     = rsp_go;
    wr_rec[1]    = rsp_rec;
    push_base[1] = r1.sp;
    push_n[1]    = rsp_finish ? rsp_push_n : '0;
    for (int j = 0; j < BVH_WIDTH; j++) push_ent[1][j] = rsp_push[j];

    if (ah_wr) begin
      wr_en[2]  = 1'b1;
      wr_rec[2] = ah_rec;
    end else if (launch_go) begin
      wr_en[2]       = 1'b1;
      wr_idx[2]      = RW'({launch_warp, launch_thread});
      wr_rec[2]      = lrec;
      push_base[2]   = '0;
      push_n[2]      = launch_replay ? '0 : PNW'(1);
      push_ent[2][0] = '{node: tlas_root, inst: '0};
    end
  end

  // ------------------------------------------------------------------
  // Sequential control state
  // ------------------------------------------------------------------
  logic          ret_found;
  logic [WW-1:0] ret_w;
  always_comb begin
    ret_found = 1'b0;
    ret_w     = '0;
    for (int w = NUM_WARPS - 1; w >= 0; w--)
      if (warp_valid[w] && all_done[w] && !(ah_active && ah_warp == WW'(w))) begin
        ret_found = 1'b1;
        ret_w     = WW'(w);
      end
  end
  assign retire_valid = ret_found;
  assign retire_warp  = ret_w;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      warp_valid  <= '0;
      ah_active   <= 1'b0;
      ah_pending  <= 1'b0;
      ah_warp     <= '0;
      ah_thread_q <= '0;
      for (int w = 0; w < NUM_WARPS; w++) tmo[w] <= '0;
      stat_node_fetch <= '0;
      stat_ckpt_write <= '0;
      stat_ckpt_read  <= '0;
      stat_anyhit     <= '0;
      stat_ckpt_ovf   <= '0;
      stat_timeout    <= '0;
    end else begin
      if (launch_go && launch_last) warp_valid[launch_warp] <= 1'b1;
      if (retire_valid && retire_ready) warp_valid[retire_warp] <= 1'b0;

      for (int w = 0; w < NUM_WARPS; w++) begin
        if (ah_start && ah_start_warp == WW'(w)) tmo[w] <= '0;
        else if (has_ahit[w] && !(ah_active && ah_warp == WW'(w)) && int'(tmo[w]) < ANYHIT_TIMEOUT)
          tmo[w] <= tmo[w] + 1'b1;
      end

      if (ah_start) begin
        ah_active <= 1'b1;
        ah_warp   <= ah_start_warp;
        if (ah_start_tmo) stat_timeout <= stat_timeout + 1;
      end else if (ah_active) begin
        if (ahit_req_valid && ahit_req_ready) begin
          ah_pending  <= 1'b1;
          ah_thread_q <= ah_cand;
        end else if (ah_wr) begin
          ah_pending <= 1'b0;
        end else if (!ah_pending && !ah_cand_valid) begin
          ah_active <= 1'b0;
        end
      end

      if (iss_go && iss_node) stat_node_fetch <= stat_node_fetch + 1;
      if (iss_go && iss_ckrd) stat_ckpt_read  <= stat_ckpt_read + 1;
      if (rsp_go && rsp_wr_req && !ck_overflow) stat_ckpt_write <= stat_ckpt_write + 1;
      if (rsp_go && rsp_wr_req && ck_overflow)  stat_ckpt_ovf   <= stat_ckpt_ovf + 1;
      if (ahit_req_valid && ahit_req_ready) stat_anyhit <= stat_anyhit + 1;
    end
  end

`ifndef SYNTHESIS
  // A response must belong to a ray that is waiting for memory.
  a_resp_owner: assert property (@(posedge clk) disable iff (!rst_n)
    sq_out_valid |-> state[RW'(rsp.ray)] == RS_WAIT);
  // The any-hit shader answers only a request that is outstanding.
  a_ahit_resp: assert property (@(posedge clk) disable iff (!rst_n)
    ahit_resp_valid |-> ah_pending);
  // A warp is not launched over one that is still resident.
  a_launch_free: assert property (@(posedge clk) disable iff (!rst_n)
    (launch_valid && launch_ready) |-> !warp_valid[launch_warp]);
`endif
endmodule
