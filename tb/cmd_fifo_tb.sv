// cmd_fifo_tb: random push/pop traffic against a queue model; checks head,
// empty, full and count every cycle, including filling the FIFO completely.
module cmd_fifo_tb;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic push, pop, full, empty;
  logic [7:0] din, head;
  logic [3:0] count;
  logic [7:0] q [$];
  int checks = 0, failures = 0, fulls = 0;
  cmd_fifo #(.T(logic [7:0]), .DEPTH(8)) dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    push = 0; pop = 0; din = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      checks++;
      if (empty !== (q.size() == 0) || full !== (q.size() == 8) || count !== 4'(q.size())
          || (q.size() != 0 && head !== q[0])) begin
        failures++;
        if (failures < 5) $display("FAIL i=%0d size %0d count %0d", i, q.size(), count);
      end
      if (full) fulls++;
      push = (i % 700 < 350) ? ($urandom_range(0, 3) != 0) : ($urandom_range(0, 3) == 0);
      if (full) push = 0;
      pop = (i % 700 < 350) ? ($urandom_range(0, 3) == 0) : ($urandom_range(0, 3) != 0);
      din = 8'($urandom);
      @(posedge clk);
      if (pop && q.size() != 0) void'(q.pop_front());
      if (push && q.size() < 8 + (pop ? 1 : 0)) q.push_back(din);
    end
    checks++;
    if (fulls == 0) begin failures++; $display("FAIL never full"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
