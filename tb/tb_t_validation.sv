// tb_t_validation: random check of the t-value validation rule.
// Reference: pass = hit & t_exit > tmin & t_enter <= tmax,
//            ckpt = hit & t_exit > tmin & t_enter > tmax,
// plus the paper's walkthrough case (t_max = 3.2 after a report: a node at
// 4.8 fails and is checkpointed, a primitive at 2.85 passes).
module tb_t_validation;
  import grtx_pkg::*;
  logic hit, pass, ckpt;
  fx_t t_enter, t_exit, tmin, tmax;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  t_validation dut (.*);

  function automatic fx_t fx(input real r);
    return fx_t'($rtoi(r * 65536.0));
  endfunction

  task automatic check(input logic ep, input logic ec, input string what);
    #1;
    checks++;
    if (pass !== ep || ckpt !== ec) begin
      failures++;
      $display("FAIL %s: pass=%0b ckpt=%0b expected %0b %0b", what, pass, ckpt, ep, ec);
    end
  endtask

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // Walkthrough: tmax went from infinity to 3.2.
    hit = 1; tmin = fx(0.0); tmax = fx(3.2);
    t_enter = fx(4.8); t_exit = fx(5.5); check(0, 1, "node beyond tmax");
    t_enter = fx(2.85); t_exit = fx(2.85); check(1, 0, "prim inside");
    t_enter = fx(3.2); t_exit = fx(3.2); check(1, 0, "t == tmax passes");
    tmin = fx(3.2); check(0, 0, "t == tmin rejected");
    hit = 0; tmin = 0; t_enter = fx(1.0); t_exit = fx(2.0); check(0, 0, "no hit");
    for (int i = 0; i < 3000; i++) begin
      logic ep, ec, inf;
      hit = 1'($urandom);
      tmin = fx_t'($urandom_range(0, 20)) <<< 14;
      tmax = ($urandom_range(0, 7) == 0) ? T_INF : fx_t'($urandom_range(0, 40)) <<< 14;
      t_enter = fx_t'($urandom_range(0, 40)) <<< 14;
      t_exit  = t_enter + (fx_t'($urandom_range(0, 10)) <<< 14);
      inf = hit && (t_exit > tmin);
      ep = inf && (t_enter <= tmax);
      ec = inf && (t_enter > tmax);
      check(ep, ec, "random");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
