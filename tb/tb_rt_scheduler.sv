// tb_rt_scheduler: random ready patterns. Every cycle the grant must be a
// ready ray, the lowest ready thread of its warp, and its warp must be the
// first warp with a ready ray after the previously taken warp (round-robin).
// Also checks that with every warp always ready the grants rotate through
// all warps.
module tb_rt_scheduler;
  localparam int NW = 8, NT = 32;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic en, take, gnt_valid;
  logic [NW*NT-1:0] ready;
  logic [2:0] gnt_warp;
  logic [4:0] gnt_thread;
  int checks = 0, failures = 0;

  rt_scheduler #(.NUM_WARPS(NW), .THREADS(NT)) dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int last = NW - 1;
    int seen[NW];
    en = 0; take = 0; ready = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 4000; i++) begin
      int ew, et;
      for (int r = 0; r < NW*NT; r++) ready[r] = ($urandom_range(0, 15) == 0);
      if (i % 7 == 0) ready = '0;
      en = ($urandom_range(0, 9) != 0);
      take = 1'($urandom);
      #1;
      ew = -1; et = -1;
      if (en)
        for (int k = 1; k <= NW && ew < 0; k++) begin
          int w;
          w = (last + k) % NW;
          if (|ready[w*NT +: NT]) ew = w;
        end
      if (ew >= 0)
        for (int t = NT - 1; t >= 0; t--) if (ready[ew*NT + t]) et = t;
      checks++;
      if (gnt_valid != (ew >= 0) || (ew >= 0 && (int'(gnt_warp) != ew || int'(gnt_thread) != et))) begin
        failures++;
        $display("FAIL grant v=%0b w=%0d t=%0d expected w=%0d t=%0d", gnt_valid, gnt_warp, gnt_thread, ew, et);
      end
      @(posedge clk);
      if (ew >= 0 && take) last = ew;
      @(negedge clk);
    end
    // All ready, always taken: NW consecutive grants cover every warp.
    ready = '1; en = 1; take = 1;
    for (int w = 0; w < NW; w++) seen[w] = 0;
    for (int i = 0; i < NW; i++) begin
      #1;
      seen[gnt_warp]++;
      @(posedge clk);
      @(negedge clk);
    end
    for (int w = 0; w < NW; w++) begin
      checks++;
      if (seen[w] != 1) begin failures++; $display("FAIL rotation warp %0d seen %0d", w, seen[w]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
