// warp_buffer: per-ray state of all warps resident in the ray tracing unit,
// plus the checkpoint buffer information registers.
//
// For each of NUM_WARPS x THREADS rays it holds one ray_rec_t record (ray
// status, ray id, ray properties, replay flag, checkpoint source and
// destination offsets, pending hit, ...) and a traversal stack of
// STACK_DEPTH entries. The fields named in the paper's warp buffer are the
// replay flag, ray id, ray properties, ray status, traversal stack and the
// two 2-byte checkpoint offsets; the paper also gives the unit-wide source
// address, destination address and maximum size (entries per ray) registers.
// The object-space ray copy, current instance, pending hit and the overflow
// bit are this design's additions that the control logic needs.
//
// Ports:
//   NRP read ports: rd_idx -> rd_rec and rd_top (the stack's top entry),
//     combinational.
//   NWP write ports: wr_en/wr_idx write a whole record (its sp field is the
//     new stack depth) and, in the same cycle, push_n stack entries at
//     positions push_base, push_base+1, ... . Entries beyond STACK_DEPTH are
//     dropped and raise the sticky stack_ovf flag. Callers must not write the
//     same ray from two ports in one cycle; if they do, the higher port wins.
//   state[]: the status field of every ray, for the scheduler and for the
//     warp-level any-hit and retire decisions.
//   cfg_*: write the checkpoint buffer information registers.
// All writes take effect at the clock edge; reset clears every record to
// RS_IDLE.
module warp_buffer
  import grtx_pkg::*;
#(
  parameter int NUM_WARPS   = 8,
  parameter int THREADS     = 32,
  parameter int STACK_DEPTH = 32,
  parameter int NRP         = 3,
  parameter int NWP         = 3
) (
  input  logic clk,
  input  logic rst_n,

  input  logic [$clog2(NUM_WARPS*THREADS)-1:0] rd_idx [NRP],
  output ray_rec_t                             rd_rec [NRP],
  output stack_entry_t                         rd_top [NRP],

  input  logic                                 wr_en     [NWP],
  input  logic [$clog2(NUM_WARPS*THREADS)-1:0] wr_idx    [NWP],
  input  ray_rec_t                             wr_rec    [NWP],
  input  logic [SP_W-1:0]                      push_base [NWP],
  input  logic [$clog2(BVH_WIDTH+1)-1:0]       push_n    [NWP],
  input  stack_entry_t                         push_ent  [NWP][BVH_WIDTH],

  output ray_state_e state [NUM_WARPS*THREADS],

  input  logic        cfg_we,
  input  addr_t       cfg_src_addr,
  input  addr_t       cfg_dst_addr,
  input  logic [15:0] cfg_max_size,
  output addr_t       ckpt_src_addr,
  output addr_t       ckpt_dst_addr,
  output logic [15:0] ckpt_max_size,

  output logic        stack_ovf
);
  localparam int NR = NUM_WARPS * THREADS;

  ray_rec_t     rec [NR];
  stack_entry_t stk [NR][STACK_DEPTH];

  always_comb begin
    for (int p = 0; p < NRP; p++) begin
      rd_rec[p] = rec[rd_idx[p]];
      if (rec[rd_idx[p]].sp == '0 || int'(rec[rd_idx[p]].sp) > STACK_DEPTH)
        rd_top[p] = '0;
      else
        rd_top[p] = stk[rd_idx[p]][int'(rec[rd_idx[p]].sp) - 1];
    end
    for (int r = 0; r < NR; r++) state[r] = rec[r].state;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < NR; r++) begin
        rec[r]       <= '0;
        rec[r].state <= RS_IDLE;
      end
      ckpt_src_addr <= '0;
      ckpt_dst_addr <= '0;
      ckpt_max_size <= '0;
      stack_ovf     <= 1'b0;
    end else begin
      for (int p = 0; p < NWP; p++) begin
        if (wr_en[p]) begin
          rec[wr_idx[p]] <= wr_rec[p];
          for (int j = 0; j < BVH_WIDTH; j++)
            if (j < int'(push_n[p]) && int'(push_base[p]) + j >= STACK_DEPTH)
              stack_ovf <= 1'b1;
        end
      end
      if (cfg_we) begin
        ckpt_src_addr <= cfg_src_addr;
        ckpt_dst_addr <= cfg_dst_addr;
        ckpt_max_size <= cfg_max_size;
      end
    end
  end

  // Stack storage has no reset: only entries below sp are ever read.
  always_ff @(posedge clk) begin
    for (int p = 0; p < NWP; p++)
      if (wr_en[p])
        for (int j = 0; j < BVH_WIDTH; j++)
          if (j < int'(push_n[p]) && int'(push_base[p]) + j < STACK_DEPTH)
            stk[wr_idx[p]][int'(push_base[p]) + j] <= push_ent[p][j];
  end
endmodule
