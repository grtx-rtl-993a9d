// tb_warp_buffer: writes records and stack pushes through all write ports,
// reads them back through all read ports and compares with a model; checks
// the stack top after pushes and pops, the state vector, the checkpoint
// buffer info registers and the sticky stack overflow flag.
module tb_warp_buffer;
  import grtx_pkg::*;
  localparam int NW = 2, NT = 4, SD = 8, NR = NW * NT;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [$clog2(NR)-1:0] rd_idx [3];
  ray_rec_t rd_rec [3];
  stack_entry_t rd_top [3];
  logic wr_en [3];
  logic [$clog2(NR)-1:0] wr_idx [3];
  ray_rec_t wr_rec [3];
  logic [SP_W-1:0] push_base [3];
  logic [$clog2(BVH_WIDTH+1)-1:0] push_n [3];
  stack_entry_t push_ent [3][BVH_WIDTH];
  ray_state_e state [NR];
  logic cfg_we;
  addr_t cfg_src_addr, cfg_dst_addr, ckpt_src_addr, ckpt_dst_addr;
  logic [15:0] cfg_max_size, ckpt_max_size;
  logic stack_ovf;
  int checks = 0, failures = 0;

  warp_buffer #(.NUM_WARPS(NW), .THREADS(NT), .STACK_DEPTH(SD)) dut (.*);

  ray_rec_t     mrec [NR];
  stack_entry_t mstk [NR][SD];

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic ray_rec_t rand_rec();
    ray_rec_t r;
    logic [$bits(ray_rec_t)-1:0] b;
    for (int i = 0; i < $bits(ray_rec_t); i += 32) b[i +: 32] = $urandom;
    r = ray_rec_t'(b);
    r.state = ray_state_e'($urandom_range(0, 4));
    return r;
  endfunction

  initial begin
    for (int p = 0; p < 3; p++) begin
      wr_en[p] = 0; wr_idx[p] = '0; wr_rec[p] = '0; push_base[p] = '0; push_n[p] = '0;
      for (int j = 0; j < BVH_WIDTH; j++) push_ent[p][j] = '0;
      rd_idx[p] = '0;
    end
    cfg_we = 0; cfg_src_addr = '0; cfg_dst_addr = '0; cfg_max_size = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int r = 0; r < NR; r++) begin
      mrec[r] = '0;
      mrec[r].state = RS_IDLE;
      checks++;
      if (state[r] != RS_IDLE) begin failures++; $display("FAIL reset state %0d", r); end
    end
    cfg_we = 1; cfg_src_addr = 64'h1000; cfg_dst_addr = 64'h2000; cfg_max_size = 16'd12;
    @(negedge clk);
    cfg_we = 0;
    checks++;
    if (ckpt_src_addr != 64'h1000 || ckpt_dst_addr != 64'h2000 || ckpt_max_size != 16'd12) begin
      failures++; $display("FAIL cfg");
    end
    for (int it = 0; it < 3000; it++) begin
      logic [$clog2(NR)-1:0] used [3];
      for (int p = 0; p < 3; p++) begin
        int idx, base, n;
        idx = $urandom_range(0, NR - 1);
        // distinct rays per port
        for (int q = 0; q < p; q++) if (wr_en[q] && used[q] == idx[$clog2(NR)-1:0]) idx = -1;
        wr_en[p] = (idx >= 0) && 1'($urandom);
        if (idx < 0) idx = 0;
        used[p] = idx[$clog2(NR)-1:0];
        wr_idx[p] = idx[$clog2(NR)-1:0];
        wr_rec[p] = rand_rec();
        base = $urandom_range(0, SD - 1);
        n = $urandom_range(0, BVH_WIDTH);
        if (base + n > SD) n = SD - base;
        push_base[p] = SP_W'(base);
        push_n[p] = $clog2(BVH_WIDTH+1)'(n);
        wr_rec[p].sp = SP_W'(base + n);
        for (int j = 0; j < BVH_WIDTH; j++) push_ent[p][j] = '{node: {$urandom, $urandom}, inst: {$urandom, $urandom}};
      end
      @(posedge clk);
      for (int p = 0; p < 3; p++)
        if (wr_en[p]) begin
          mrec[wr_idx[p]] = wr_rec[p];
          for (int j = 0; j < int'(push_n[p]); j++) mstk[wr_idx[p]][int'(push_base[p]) + j] = push_ent[p][j];
        end
      @(negedge clk);
      for (int p = 0; p < 3; p++) wr_en[p] = 0;
      for (int p = 0; p < 3; p++) rd_idx[p] = $clog2(NR)'($urandom_range(0, NR - 1));
      #1;
      for (int p = 0; p < 3; p++) begin
        ray_rec_t e;
        e = mrec[rd_idx[p]];
        checks++;
        if (rd_rec[p] !== e) begin failures++; $display("FAIL rec port %0d ray %0d", p, rd_idx[p]); end
        if (e.sp != 0) begin
          checks++;
          if (rd_top[p] !== mstk[rd_idx[p]][int'(e.sp) - 1]) begin
            failures++; $display("FAIL top port %0d ray %0d sp %0d", p, rd_idx[p], e.sp);
          end
        end
      end
      for (int r = 0; r < NR; r++) begin
        checks++;
        if (state[r] != mrec[r].state) begin failures++; $display("FAIL state %0d", r); end
      end
    end
    checks++;
    if (stack_ovf) begin failures++; $display("FAIL spurious stack overflow"); end
    // Overflow: push 3 at SD-1.
    @(negedge clk);
    wr_en[0] = 1; wr_idx[0] = '0; wr_rec[0] = mrec[0]; push_base[0] = SP_W'(SD - 1); push_n[0] = 3;
    @(negedge clk);
    wr_en[0] = 0;
    checks++;
    if (!stack_ovf) begin failures++; $display("FAIL overflow not flagged"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
