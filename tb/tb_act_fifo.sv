// tb_act_fifo: random pushes and pops against a queue model, checking data
// order, full/empty/count, that a push when full is dropped, and that 32
// entries fit.
module tb_act_fifo;
  logic clk = 1'b0; always #5 clk = ~clk;
  logic rst_n = 1'b0, push = 0, pop = 0, full, empty;
  logic [31:0] din = '0, dout;
  logic [5:0] count;
  logic [31:0] q [$];
  int checks = 0, failures = 0, max_fill = 0;
  act_fifo dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      @(negedge clk);
      push = ($urandom_range(0, 99) < ((i / 500) % 2 ? 30 : 70));
      din = $urandom;
      pop = !empty && ($urandom_range(0, 99) < ((i / 500) % 2 ? 70 : 30));
      checks++;
      if (empty != (q.size() == 0) || full != (q.size() == 32) || count != 6'(q.size())) begin
        failures++; $display("FAIL flags at %0d", i);
      end
      if (pop) begin
        checks++;
        if (dout !== q[0]) begin failures++; $display("FAIL data"); end
      end
      @(posedge clk);
      if (pop) void'(q.pop_front());
      if (push && q.size() + (pop ? 1 : 0) < 33 && !(full)) q.push_back(din);
      if (q.size() > max_fill) max_fill = q.size();
    end
    checks++; if (max_fill != 32) begin failures++; $display("FAIL never full (%0d)", max_fill); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
