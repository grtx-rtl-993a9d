// tb_rt_unit: end-to-end test of the ray tracing unit at its default size
// (8 warps x 32 threads), rendering a small Gaussian scene with multi-round
// k-buffer tracing three times:
//   1. baseline  : checkpointing off (max size 0), every round restarts
//                  from the TLAS root with tmin = last blended t;
//   2. replay    : checkpointing on, rounds after the first resume from the
//                  checkpoint source buffer (source/destination swapped
//                  between rounds), evicted hits carried over;
//   3. overflow  : as 2 but with a tiny checkpoint area per ray so that the
//                  restart-from-root fallback is taken;
//   4./5.        : baseline and replay again with k = 8, the k-buffer size
//                  the paper evaluates by default (1-3 use k = 4, the size
//                  of its worked example).
// The scene: NG Gaussians, each an axis-aligned ellipsoid (instance = 3x4
// world-to-object matrix) sharing one BLAS, a 20-triangle icosahedron that
// encloses the unit sphere (BVH-6: root -> 4 inner nodes -> 5 triangles).
// The TLAS is root -> 3 inner nodes -> 4 instances.
// Around the unit the testbench models the memory (random latency, out of
// order, random back-pressure), the any-hit shader (k-buffer insertion sort,
// eviction buffer, report/ignore, as in the paper's listing) and the raygen
// shader (round loop, blending, early ray termination).
// Checks: for every ray whose hits are not numerically ambiguous, the
// blended Gaussian sequence equals the reference (all front-face hits of the
// real-arithmetic icosahedra, sorted by t) up to the early-termination
// point, in all five runs; each replay run fetches fewer nodes than its
// baseline; each mechanism (checkpoint write, replay read, re-checkpoint
// without fetch, instance re-fetch on replay, any-hit report and ignore,
// any-hit timeout, checkpoint overflow fallback, memory back-pressure,
// several warps resident) happens at least once; no stack overflow.
module tb_rt_unit;
  import grtx_pkg::*;

  localparam int NW = 8, NT = 32, NRAY = NW * NT;
  localparam int NG = 12;
  int K = 4;                            // k-buffer size of the current run
  localparam real R_ICO = 1.3;          // icosahedron vertex radius
  localparam real T_STOP = 0.02;        // early ray termination threshold
  localparam addr_t TLAS_ROOT = 64'h1000;
  localparam addr_t BLAS_ROOT = 64'h20000;
  localparam addr_t CKPT_A    = 64'h100_0000;
  localparam addr_t CKPT_B    = 64'h200_0000;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle++;

  // ---------------------------------------------------------------- DUT
  logic        cfg_we;
  addr_t       cfg_src_addr, cfg_dst_addr;
  logic [15:0] cfg_max_size;
  logic        launch_valid, launch_ready, launch_last, launch_active, launch_replay;
  logic [2:0]  launch_warp;
  logic [4:0]  launch_thread;
  logic [31:0] launch_ray_id;
  vec3_t       launch_org, launch_dir;
  fx_t         launch_tmin, launch_tmax;
  logic        retire_valid, retire_ready;
  logic [2:0]  retire_warp;
  logic        ahit_req_valid, ahit_req_ready;
  logic [2:0]  ahit_req_warp;
  logic [4:0]  ahit_req_thread;
  logic [31:0] ahit_req_ray_id;
  prim_t       ahit_req_prim;
  fx_t         ahit_req_thit;
  logic        ahit_resp_valid, ahit_resp_report;
  logic        mem_req_valid, mem_req_ready, mem_resp_valid, mem_resp_ready;
  mem_req_t    mem_req;
  mem_resp_t   mem_resp;
  logic [31:0] stat_node_fetch, stat_ckpt_write, stat_ckpt_read, stat_anyhit,
               stat_ckpt_ovf, stat_timeout;
  logic        stack_ovf;

  rt_unit dut (
    .clk, .rst_n, .tlas_root(TLAS_ROOT),
    .cfg_we, .cfg_src_addr, .cfg_dst_addr, .cfg_max_size,
    .launch_valid, .launch_ready, .launch_warp, .launch_thread, .launch_last,
    .launch_active, .launch_replay, .launch_ray_id, .launch_org, .launch_dir,
    .launch_tmin, .launch_tmax,
    .retire_valid, .retire_ready, .retire_warp,
    .ahit_req_valid, .ahit_req_ready, .ahit_req_warp, .ahit_req_thread,
    .ahit_req_ray_id, .ahit_req_prim, .ahit_req_thit,
    .ahit_resp_valid, .ahit_resp_report,
    .mem_req_valid, .mem_req_ready, .mem_req,
    .mem_resp_valid, .mem_resp_ready, .mem_resp,
    .stat_node_fetch, .stat_ckpt_write, .stat_ckpt_read, .stat_anyhit,
    .stat_ckpt_ovf, .stat_timeout, .stack_ovf
  );

  // ---------------------------------------------------------- helpers
  function automatic fx_t fx(input real r);
    return fx_t'($rtoi(r * 65536.0));
  endfunction
  function automatic real rl(input fx_t v);
    return real'(v) / 65536.0;
  endfunction

  // ------------------------------------------------------------ scene
  node_word_t nodes [addr_t];
  real gc [NG][3];     // centres
  real gs [NG][3];     // scales
  real go [NG];        // opacity
  real iv [12][3];     // icosahedron vertices
  int  face [20][3];
  real ro [NRAY][3], rd [NRAY][3];
  real gbox_lo [4][3], gbox_hi [4][3];

  function automatic node_word_t mk_internal(input addr_t a [BVH_WIDTH], input real lo [BVH_WIDTH][3],
                                             input real hi [BVH_WIDTH][3], input int n);
    node_word_t w;
    w = '0;
    w[1:0] = NODE_INTERNAL;
    for (int c = 0; c < n; c++) begin
      child_t ch;
      ch.valid = 1'b1;
      ch.addr  = a[c];
      ch.box.lo = '{fx(lo[c][0]), fx(lo[c][1]), fx(lo[c][2])};
      ch.box.hi = '{fx(hi[c][0]), fx(hi[c][1]), fx(hi[c][2])};
      w[2 + c * CHILD_BITS +: CHILD_BITS] = ch;
    end
    return w;
  endfunction

  task automatic build_scene();
    real phi;
    int nf;
    addr_t a [BVH_WIDTH];
    real lo [BVH_WIDTH][3], hi [BVH_WIDTH][3];
    real glo [3][3], ghi [3][3];
    phi = (1.0 + $sqrt(5.0)) / 2.0;
    // icosahedron
    for (int i = 0; i < 4; i++) begin
      real s1, s2;
      s1 = (i & 1) ? -1.0 : 1.0;
      s2 = (i & 2) ? -phi : phi;
      iv[i]     = '{0.0, s1, s2};
      iv[4 + i] = '{s1, s2, 0.0};
      iv[8 + i] = '{s2, 0.0, s1};
    end
    nf = 0;
    for (int i = 0; i < 12; i++)
      for (int j = i + 1; j < 12; j++)
        for (int l = j + 1; l < 12; l++) begin
          real dij, dil, djl;
          dij = 0; dil = 0; djl = 0;
          for (int k = 0; k < 3; k++) begin
            dij += (iv[i][k]-iv[j][k])**2; dil += (iv[i][k]-iv[l][k])**2; djl += (iv[j][k]-iv[l][k])**2;
          end
          if (dij < 4.01 && dil < 4.01 && djl < 4.01) begin
            real e1[3], e2[3], n[3], cdot;
            for (int k = 0; k < 3; k++) begin e1[k] = iv[j][k]-iv[i][k]; e2[k] = iv[l][k]-iv[i][k]; end
            n[0] = e1[1]*e2[2]-e1[2]*e2[1]; n[1] = e1[2]*e2[0]-e1[0]*e2[2]; n[2] = e1[0]*e2[1]-e1[1]*e2[0];
            cdot = n[0]*(iv[i][0]+iv[j][0]+iv[l][0]) + n[1]*(iv[i][1]+iv[j][1]+iv[l][1]) + n[2]*(iv[i][2]+iv[j][2]+iv[l][2]);
            face[nf] = (cdot > 0) ? '{i, j, l} : '{i, l, j};
            nf++;
          end
        end
    if (nf != 20) $display("ERROR icosahedron has %0d faces", nf);
    for (int i = 0; i < 12; i++) begin
      real m;
      m = $sqrt(iv[i][0]**2 + iv[i][1]**2 + iv[i][2]**2);
      for (int k = 0; k < 3; k++) iv[i][k] = iv[i][k] * R_ICO / m;
    end
    // BLAS: triangle leaves, 4 inner nodes of 5, root.
    for (int f = 0; f < 20; f++) begin
      node_word_t w;
      w = '0;
      w[1:0] = NODE_TRI;
      for (int v = 0; v < 3; v++)
        w[2 + v*96 +: 96] = {fx(iv[face[f][v]][0]), fx(iv[face[f][v]][1]), fx(iv[face[f][v]][2])};
      nodes[64'h21000 + 64'(f) * 64'h100] = w;
    end
    for (int g = 0; g < 4; g++) begin
      real blo[3], bhi[3];
      for (int c = 0; c < 5; c++) begin
        int f;
        f = g * 5 + c;
        a[c] = 64'h21000 + 64'(f) * 64'h100;
        for (int k = 0; k < 3; k++) begin
          lo[c][k] = 1e9; hi[c][k] = -1e9;
          for (int v = 0; v < 3; v++) begin
            if (iv[face[f][v]][k] < lo[c][k]) lo[c][k] = iv[face[f][v]][k];
            if (iv[face[f][v]][k] > hi[c][k]) hi[c][k] = iv[face[f][v]][k];
          end
          lo[c][k] -= 0.02; hi[c][k] += 0.02;
          if (c == 0 || lo[c][k] < blo[k]) blo[k] = lo[c][k];
          if (c == 0 || hi[c][k] > bhi[k]) bhi[k] = hi[c][k];
        end
      end
      nodes[BLAS_ROOT + 64'h200 + 64'(g) * 64'h100] = mk_internal(a, lo, hi, 5);
      gbox_lo[g] = '{blo[0], blo[1], blo[2]};
      gbox_hi[g] = '{bhi[0], bhi[1], bhi[2]};
    end
    for (int g = 0; g < 4; g++) begin
      a[g] = BLAS_ROOT + 64'h200 + 64'(g) * 64'h100;
      for (int k = 0; k < 3; k++) begin lo[g][k] = gbox_lo[g][k]; hi[g][k] = gbox_hi[g][k]; end
    end
    nodes[BLAS_ROOT] = mk_internal(a, lo, hi, 4);
    // Gaussians along +z.
    for (int g = 0; g < NG; g++) begin
      gc[g] = '{0.25 * $sin(real'(g) * 1.7), 0.25 * $cos(real'(g) * 2.3), 2.0 + 1.3 * real'(g)};
      gs[g] = '{0.9 + 0.05 * real'(g % 4), 0.95 + 0.04 * real'(g % 3), 0.3 + 0.02 * real'(g % 5)};
      go[g] = 0.25 + 0.05 * real'(g % 3);
    end
    // Instance leaves.
    for (int g = 0; g < NG; g++) begin
      node_word_t w;
      w = '0;
      w[1:0] = NODE_INSTANCE;
      for (int r = 0; r < 3; r++) begin
        w[2 + (r*4 + r) * 32 +: 32] = fx(1.0 / gs[g][r]);
        w[2 + (r*4 + 3) * 32 +: 32] = fx(-gc[g][r] / gs[g][r]);
      end
      w[386 +: 64] = BLAS_ROOT;
      w[450 +: 32] = 32'(g);
      nodes[64'h8000 + 64'(g) * 64'h100] = w;
    end
    // TLAS: 3 inner nodes of 4 instances each.
    for (int n = 0; n < 3; n++) begin
      for (int c = 0; c < 4; c++) begin
        int g;
        g = n * 4 + c;
        a[c] = 64'h8000 + 64'(g) * 64'h100;
        for (int k = 0; k < 3; k++) begin
          lo[c][k] = gc[g][k] - R_ICO * gs[g][k] - 0.02;
          hi[c][k] = gc[g][k] + R_ICO * gs[g][k] + 0.02;
          if (c == 0 || lo[c][k] < glo[n][k]) glo[n][k] = lo[c][k];
          if (c == 0 || hi[c][k] > ghi[n][k]) ghi[n][k] = hi[c][k];
        end
      end
      nodes[TLAS_ROOT + 64'h200 + 64'(n) * 64'h200] = mk_internal(a, lo, hi, 4);
    end
    for (int n = 0; n < 3; n++) begin
      a[n] = TLAS_ROOT + 64'h200 + 64'(n) * 64'h200;
      for (int k = 0; k < 3; k++) begin lo[n][k] = glo[n][k]; hi[n][k] = ghi[n][k]; end
    end
    nodes[TLAS_ROOT] = mk_internal(a, lo, hi, 3);
    // Rays: a 16x16 grid looking down +z.
    for (int r = 0; r < NRAY; r++) begin
      real x, y;
      x = -1.1 + 2.2 * real'(r % 16) / 15.0;
      y = -1.1 + 2.2 * real'(r / 16) / 15.0;
      ro[r] = '{x, y, 0.0};
      rd[r] = '{0.03 * x, -0.02 * y, 1.0};
    end
  endtask

  // Reference: every Gaussian whose icosahedron front face the ray crosses.
  int  ref_n [NRAY];
  int  ref_g [NRAY][NG];
  bit  fragile [NRAY];

  task automatic build_reference();
    for (int r = 0; r < NRAY; r++) begin
      real ts [NG];
      int  gs_ [NG];
      ref_n[r] = 0;
      fragile[r] = 0;
      for (int g = 0; g < NG; g++) begin
        real o[3], d[3];
        int nh;
        real th;
        nh = 0; th = 0;
        for (int k = 0; k < 3; k++) begin o[k] = (ro[r][k] - gc[g][k]) / gs[g][k]; d[k] = rd[r][k] / gs[g][k]; end
        for (int f = 0; f < 20; f++) begin
          real a[3], e1[3], e2[3], p[3], s[3], q[3], det, u, v;
          for (int k = 0; k < 3; k++) begin
            a[k] = iv[face[f][0]][k];
            e1[k] = iv[face[f][1]][k] - a[k]; e2[k] = iv[face[f][2]][k] - a[k]; s[k] = o[k] - a[k];
          end
          p[0] = d[1]*e2[2]-d[2]*e2[1]; p[1] = d[2]*e2[0]-d[0]*e2[2]; p[2] = d[0]*e2[1]-d[1]*e2[0];
          q[0] = s[1]*e1[2]-s[2]*e1[1]; q[1] = s[2]*e1[0]-s[0]*e1[2]; q[2] = s[0]*e1[1]-s[1]*e1[0];
          det = e1[0]*p[0]+e1[1]*p[1]+e1[2]*p[2];
          if (det > 1e-6) begin
            u = (s[0]*p[0]+s[1]*p[1]+s[2]*p[2]) / det;
            v = (d[0]*q[0]+d[1]*q[1]+d[2]*q[2]) / det;
            if (u > -0.003 && v > -0.003 && u + v < 1.003) begin
              if (u < 0.003 || v < 0.003 || u + v > 0.997) fragile[r] = 1;
              if (u >= 0 && v >= 0 && u + v <= 1) begin
                nh++;
                th = (e2[0]*q[0]+e2[1]*q[1]+e2[2]*q[2]) / det;
              end
            end
          end
        end
        if (nh > 1) fragile[r] = 1;
        if (nh == 1) begin ts[ref_n[r]] = th; gs_[ref_n[r]] = g; ref_n[r]++; end
      end
      // sort by t
      for (int i = 0; i < ref_n[r]; i++)
        for (int j = i + 1; j < ref_n[r]; j++)
          if (ts[j] < ts[i]) begin
            real tt; int gg;
            tt = ts[i]; ts[i] = ts[j]; ts[j] = tt;
            gg = gs_[i]; gs_[i] = gs_[j]; gs_[j] = gg;
          end
      for (int i = 0; i < ref_n[r]; i++) begin
        ref_g[r][i] = gs_[i];
        if (i > 0 && ts[i] - ts[i-1] < 0.01) fragile[r] = 1;
      end
    end
  endtask

  // ----------------------------------------------------------- memory
  typedef struct {
    mem_resp_t r;
    longint    due;
  } pend_t;
  pend_t pend [$];
  logic [CKPT_BITS-1:0] ckmem [addr_t];
  int n_backpressure = 0, n_inst_fetch = 0, n_rechk = 0;
  logic [CKPT_BITS-1:0] last_read [NRAY];

  always @(posedge clk) begin
    if (rst_n) begin
      if (mem_req_valid && mem_req_ready) begin
        if (mem_req.kind == TAG_WRITE) begin
          ckmem[mem_req.addr] = mem_req.wdata;
          if (mem_req.wdata != '0 && mem_req.wdata == last_read[mem_req.ray]) n_rechk++;
        end else begin
          pend_t p;
          p.r.kind = mem_req.kind;
          p.r.ray  = mem_req.ray;
          p.r.addr = mem_req.addr;
          if (mem_req.kind == TAG_CKPT) begin
            p.r.data = ckmem.exists(mem_req.addr) ? NODE_BITS'(ckmem[mem_req.addr]) : '0;
            last_read[mem_req.ray] = CKPT_BITS'(p.r.data);
          end else begin
            if (!nodes.exists(mem_req.addr)) begin
              failures++;
              $display("FAIL fetch of unknown node %h", mem_req.addr);
              p.r.data = '0;
              p.r.data[1:0] = NODE_EMPTY;
            end else p.r.data = nodes[mem_req.addr];
            if (mem_req.kind == TAG_INST) n_inst_fetch++;
          end
          p.due = cycle + longint'($urandom_range(3, 30));
          pend.push_back(p);
        end
      end
      if (mem_req_valid && !mem_req_ready) n_backpressure++;
      mem_req_ready <= ($urandom_range(0, 9) != 0);
      if (!mem_resp_valid || mem_resp_ready) begin
        int pick;
        pick = -1;
        for (int i = 0; i < pend.size() && pick < 0; i++)
          if (pend[i].due <= cycle && $urandom_range(0, 3) != 0) pick = i;
        if (pick >= 0) begin
          mem_resp_valid <= 1'b1;
          mem_resp <= pend[pick].r;
          pend.delete(pick);
        end else mem_resp_valid <= 1'b0;
      end
    end else begin
      mem_resp_valid <= 1'b0;
      mem_req_ready  <= 1'b0;
    end
  end

  // ------------------------------------------------ any-hit shader model
  typedef struct { real t; int g; } hit_t;
  hit_t kbuf  [NRAY][$];
  hit_t evict [NRAY][$];
  bit   use_evict;
  int   n_report = 0, n_ignore = 0;
  int   ah_delay = -1;
  logic ah_rep;

  function automatic hit_t insertion_sort(input int r, input hit_t h);
    // Insert h, keep at most K entries, return the rejected one (or h itself
    // marked with g = -1 when the buffer was not full).
    int pos;
    hit_t rej;
    pos = kbuf[r].size();
    for (int i = kbuf[r].size() - 1; i >= 0; i--) if (kbuf[r][i].t > h.t) pos = i;
    kbuf[r].insert(pos, h);
    if (kbuf[r].size() > K) begin
      rej = kbuf[r][K];
      kbuf[r].delete(K);
    end else begin
      rej.t = 1e30; rej.g = -1;
    end
    return rej;
  endfunction

  always @(posedge clk) begin
    ahit_resp_valid <= 1'b0;
    if (ah_delay > 0) ah_delay--;
    else if (ah_delay == 0) begin
      ahit_resp_valid  <= 1'b1;
      ahit_resp_report <= ah_rep;
      ah_delay = -1;
    end
    if (rst_n && ahit_req_valid && ahit_req_ready) begin
      hit_t h, rej;
      int r;
      r = int'(ahit_req_ray_id);
      h.t = rl(ahit_req_thit);
      h.g = int'(ahit_req_prim);
      rej = insertion_sort(r, h);
      if (rej.g >= 0 && use_evict) evict[r].push_back(rej);
      ah_rep = !(h.t < rej.t);
      if (ah_rep) n_report++; else n_ignore++;
      ah_delay = $urandom_range(0, 3);
    end
    ahit_req_ready <= (ah_delay < 0) && !(rst_n && ahit_req_valid && ahit_req_ready);
  end

  // ------------------------------------------------- raygen shader model
  int   blended [NRAY][$];
  real  trans [NRAY];
  real  tmin_r [NRAY];
  bit   done_r [NRAY];
  int   n_restart = 0;
  int   n_retire = 0, max_resident = 0, n_rounds = 0;
  int   resident = 0;

  task automatic launch_round(input bit replay);
    for (int w = 0; w < NW; w++)
      for (int t = 0; t < NT; t++) begin
        int r;
        r = w * NT + t;
        @(negedge clk);
        launch_valid  = 1'b1;
        launch_warp   = 3'(w);
        launch_thread = 5'(t);
        launch_last   = (t == NT - 1);
        launch_active = !done_r[r];
        launch_replay = replay;
        launch_ray_id = 32'(r);
        launch_org    = '{fx(ro[r][0]), fx(ro[r][1]), fx(ro[r][2])};
        launch_dir    = '{fx(rd[r][0]), fx(rd[r][1]), fx(rd[r][2])};
        launch_tmin   = fx(tmin_r[r]);
        launch_tmax   = T_INF;
        @(posedge clk);
        while (!launch_ready) @(posedge clk);
        if (launch_last) resident++;
        if (resident > max_resident) max_resident = resident;
      end
    @(negedge clk);
    launch_valid = 1'b0;
  endtask

  always @(posedge clk)
    if (retire_valid && retire_ready) begin
      n_retire++;
      resident--;
    end

  task automatic run(input int mode, input logic [15:0] msize, output longint fetches,
                     output longint cycles);
    longint c0;
    int f0;
    bit any;
    int round;
    addr_t src, dst;
    c0 = cycle;
    f0 = int'(stat_node_fetch);
    use_evict = (mode != 0);
    for (int r = 0; r < NRAY; r++) begin
      kbuf[r].delete(); evict[r].delete(); blended[r].delete();
      trans[r] = 1.0; tmin_r[r] = 0.0; done_r[r] = 0;
    end
    src = CKPT_A; dst = CKPT_B;
    round = 0;
    any = 1;
    while (any) begin
      @(negedge clk);
      cfg_we = 1; cfg_src_addr = src; cfg_dst_addr = dst; cfg_max_size = msize;
      @(negedge clk);
      cfg_we = 0;
      // Before the round: evicted Gaussians go back to the k-buffer.
      for (int r = 0; r < NRAY; r++) begin
        kbuf[r].delete();
        if (mode != 0 && round > 0) begin
          // A ray whose checkpoint area overflowed restarts from the root:
          // its first source entry is the TLAS root. Its evicted hits will
          // be found again, so they are dropped here.
          addr_t e0;
          e0 = src + 64'(r) * 64'(msize) * 64'd20;
          if (ckmem.exists(e0) && ckmem[e0][CKPT_BITS-1 -: 64] == TLAS_ROOT) begin
            evict[r].delete();
            n_restart++;
          end
          evict[r].sort(h) with (h.t);
          while (kbuf[r].size() < K && evict[r].size() > 0) kbuf[r].push_back(evict[r].pop_front());
        end
      end
      launch_round(mode != 0 && round > 0);
      wait (resident == 0);
      n_rounds++;
      // Blend and decide.
      any = 0;
      for (int r = 0; r < NRAY; r++) begin
        if (done_r[r]) continue;
        foreach (kbuf[r][i]) begin
          if (trans[r] >= T_STOP) begin
            blended[r].push_back(kbuf[r][i].g);
            trans[r] = trans[r] * (1.0 - go[kbuf[r][i].g]);
            tmin_r[r] = kbuf[r][i].t;
          end
        end
        if (kbuf[r].size() < K || trans[r] < T_STOP) done_r[r] = 1;
        else any = 1;
      end
      begin addr_t x; x = src; src = dst; dst = x; end
      round++;
      if (round > 20) begin failures++; $display("FAIL too many rounds"); any = 0; end
    end
    fetches = longint'(stat_node_fetch) - longint'(f0);
    cycles = cycle - c0;
  endtask

  task automatic compare(input string name);
    int bad, strict;
    bad = 0; strict = 0;
    for (int r = 0; r < NRAY; r++) begin
      real tr;
      int n;
      if (fragile[r]) continue;
      strict++;
      // expected length: until transmittance drops below the threshold
      tr = 1.0; n = 0;
      while (n < ref_n[r] && tr >= T_STOP) begin tr = tr * (1.0 - go[ref_g[r][n]]); n++; end
      checks++;
      if (blended[r].size() != n) begin
        bad++;
        if (bad < 5) $display("FAIL %s ray %0d blended %0d expected %0d", name, r, blended[r].size(), n);
      end else begin
        for (int i = 0; i < n; i++)
          if (blended[r][i] != ref_g[r][i]) begin
            bad++;
            if (bad < 5) $display("FAIL %s ray %0d pos %0d got %0d expected %0d", name, r, i, blended[r][i], ref_g[r][i]);
            break;
          end
      end
    end
    failures += bad;
    $display("%s: %0d rays compared strictly, %0d mismatches", name, strict, bad);
  endtask

  task automatic mech(input string name, input longint n);
    checks++;
    if (n <= 0) begin failures++; $display("FAIL mechanism never happened: %s", name); end
    else $display("  %-34s %0d", name, n);
  endtask

  initial begin
    repeat (4_000_000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint f_base, f_ck, f_ovf, c_base, c_ck, c_ovf, f_base8, f_ck8, c_base8, c_ck8;
    int ck_w, ck_r, ovf, tmo, rep_ck, ign_ck, inst_ck, rechk;
    cfg_we = 0; cfg_src_addr = '0; cfg_dst_addr = '0; cfg_max_size = '0;
    launch_valid = 0; launch_warp = '0; launch_thread = '0; launch_last = 0;
    launch_active = 0; launch_replay = 0; launch_ray_id = '0;
    launch_org = '0; launch_dir = '0; launch_tmin = '0; launch_tmax = '0;
    retire_ready = 1;
    mem_resp_valid = 0; mem_resp = '0;
    ahit_resp_report = 0;
    for (int r = 0; r < NRAY; r++) last_read[r] = '0;
    build_scene();
    build_reference();
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(0, 16'd0, f_base, c_base);
    compare("baseline");
    ck_w = int'(stat_ckpt_write); ck_r = int'(stat_ckpt_read);
    rep_ck = n_report; ign_ck = n_ignore; inst_ck = n_inst_fetch; rechk = n_rechk;
    run(1, 16'd64, f_ck, c_ck);
    compare("replay");
    ck_w = int'(stat_ckpt_write) - ck_w; ck_r = int'(stat_ckpt_read) - ck_r;
    inst_ck = n_inst_fetch - inst_ck; rechk = n_rechk - rechk;
    ovf = int'(stat_ckpt_ovf);
    run(1, 16'd3, f_ovf, c_ovf);
    compare("overflow");
    ovf = int'(stat_ckpt_ovf) - ovf;
    K = 8;
    run(0, 16'd0, f_base8, c_base8);
    compare("baseline k=8");
    run(1, 16'd64, f_ck8, c_ck8);
    compare("replay k=8");
    $display("node fetches k=4: baseline %0d, replay %0d, overflow %0d", f_base, f_ck, f_ovf);
    $display("cycles       k=4: baseline %0d, replay %0d, overflow %0d", c_base, c_ck, c_ovf);
    $display("node fetches k=8: baseline %0d, replay %0d", f_base8, f_ck8);
    $display("cycles       k=8: baseline %0d, replay %0d", c_base8, c_ck8);
    checks++;
    if (!(f_ck < f_base)) begin failures++; $display("FAIL replay does not save node fetches"); end
    checks++;
    if (!(f_ck8 < f_base8)) begin failures++; $display("FAIL replay does not save node fetches (k=8)"); end
    checks++;
    if (stack_ovf) begin failures++; $display("FAIL traversal stack overflow"); end
    $display("mechanisms:");
    mech("checkpoint writes (replay run)", ck_w);
    mech("checkpoint reads (replay run)", ck_r);
    mech("re-checkpoint without fetch", rechk);
    mech("instance fetch before BLAS node", inst_ck);
    mech("any-hit report (tmax update)", n_report);
    mech("any-hit ignore", n_ignore);
    mech("any-hit invocations", stat_anyhit);
    mech("any-hit timeout", stat_timeout);
    mech("checkpoint overflow fallback", ovf);
    mech("restart from root after overflow", n_restart);
    mech("memory back-pressure cycles", n_backpressure);
    mech("warps resident at once (>1)", max_resident - 1);
    mech("warp retirements", n_retire);
    mech("rounds", n_rounds);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
