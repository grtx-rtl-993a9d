// tb_sync_fifo: random pushes and pops against a queue model. Checks data
// order, the full and empty flags, the count, and that a full queue of DEPTH
// accepts exactly DEPTH elements.
module tb_sync_fifo;
  localparam int DEPTH = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic in_valid, in_ready, out_valid, out_ready;
  logic [15:0] in_data, out_data;
  logic [$clog2(DEPTH+1)-1:0] count;
  int checks = 0, failures = 0;
  logic [15:0] model [$];

  sync_fifo #(.T(logic [15:0]), .DEPTH(DEPTH)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int accepted;
    in_valid = 0; out_ready = 0; in_data = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    // Fill: exactly DEPTH accepted.
    accepted = 0;
    for (int i = 0; i < DEPTH + 3; i++) begin
      in_valid = 1; in_data = 16'(100 + i);
      @(posedge clk);
      if (in_ready) begin accepted++; model.push_back(in_data); end
      @(negedge clk);
    end
    in_valid = 0;
    checks++;
    if (accepted != DEPTH || int'(count) != DEPTH || in_ready) begin
      failures++; $display("FAIL fill accepted=%0d count=%0d", accepted, count);
    end
    for (int i = 0; i < 5000; i++) begin
      in_valid  = 1'($urandom);
      in_data   = 16'($urandom);
      out_ready = 1'($urandom);
      #1;
      checks++;
      if (out_valid != (model.size() != 0) || in_ready != (model.size() < DEPTH) ||
          int'(count) != model.size()) begin
        failures++; $display("FAIL flags size=%0d count=%0d", model.size(), count);
      end
      if (out_valid && out_ready) begin
        checks++;
        if (out_data !== model[0]) begin
          failures++; $display("FAIL data %h expected %h", out_data, model[0]);
        end
      end
      @(posedge clk);
      if (out_valid && out_ready) void'(model.pop_front());
      if (in_valid && in_ready) model.push_back(in_data);
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
