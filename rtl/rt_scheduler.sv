// rt_scheduler: picks the ray that the ray tracing unit works on next.
//
// Every cycle in which `en` is high, the scheduler selects one warp that has a
// ray ready to issue a memory request, going round-robin from the warp after
// the last one served, and within that warp the lowest-numbered ready thread.
// A grant is combinational from `ready`; the round-robin pointer advances at
// the clock edge when the caller takes the grant (`take`, which may come
// late in the cycle and is ignored without a grant). The paper says only that the RT
// scheduler selects a warp each cycle; round-robin and the thread choice are
// this design's.
module rt_scheduler #(
  parameter int NUM_WARPS = 8,
  parameter int THREADS   = 32
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en,
  input  logic take,
  input  logic [NUM_WARPS*THREADS-1:0] ready,
  output logic gnt_valid,
  output logic [$clog2(NUM_WARPS)-1:0] gnt_warp,
  output logic [$clog2(THREADS)-1:0]   gnt_thread
);
  localparam int WW = (NUM_WARPS > 1) ? $clog2(NUM_WARPS) : 1;
  logic [WW-1:0] last;
  logic [NUM_WARPS-1:0] warp_ready;

  always_comb begin
    for (int w = 0; w < NUM_WARPS; w++)
      warp_ready[w] = |ready[w*THREADS +: THREADS];
    gnt_valid  = 1'b0;
    gnt_warp   = '0;
    gnt_thread = '0;
    for (int i = NUM_WARPS; i >= 1; i--)
      if (en && warp_ready[(int'(last) + i) % NUM_WARPS]) begin
        gnt_valid = 1'b1;
        gnt_warp  = WW'((int'(last) + i) % NUM_WARPS);
      end
    for (int t = THREADS - 1; t >= 0; t--)
      if (ready[int'(gnt_warp)*THREADS + t]) gnt_thread = $clog2(THREADS)'(t);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last <= WW'(NUM_WARPS - 1);
    else if (gnt_valid && take) last <= gnt_warp;
  end
endmodule
