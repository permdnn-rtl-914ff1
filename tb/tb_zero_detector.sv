// tb_zero_detector: feeds random words (about half the lanes zero, random
// lane masks) with random back-pressure and checks that exactly the non-zero
// in-range lanes come out, in order, with the right index, and that the
// skipped-count adds up to the dropped lanes. A dense stream must run at one
// entry per cycle.
module tb_zero_detector;
  import permdnn_pkg::*;
  logic clk = 1'b0; always #5 clk = ~clk;
  logic rst_n = 1'b0, in_valid = 0, in_ready, out_valid, out_ready = 0;
  logic [63:0] in_word = '0;
  logic [15:0] in_idx = '0;
  logic [3:0] in_lmask = '0;
  xent_t out_ent;
  logic [2:0] skipped;
  xent_t exp_q [$];
  int checks = 0, failures = 0, skip_tot = 0, exp_skip = 0, dense_cycles = 0;
  zero_detector dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) begin
    if (rst_n) skip_tot <= skip_tot + int'(skipped);
    if (out_valid && out_ready) begin
      checks++;
      if (exp_q.size() == 0 || out_ent !== exp_q[0]) begin
        failures++; $display("FAIL entry %0d/%0d", out_ent.val, out_ent.idx);
      end
      if (exp_q.size() > 0) void'(exp_q.pop_front());
    end
  end
  task automatic send(input bit dense);
    in_valid = 1; in_idx = in_idx + 16'd4;
    for (int l = 0; l < 4; l++) begin
      in_word[l*16 +: 16] = (dense || $urandom_range(0, 1)) ? 16'($urandom_range(1, 65535)) : 16'd0;
    end
    in_lmask = dense ? 4'hf : (($urandom_range(0, 3) == 0) ? 4'(($urandom_range(0, 3) << 0) | 1) : 4'hf);
    for (int l = 0; l < 4; l++)
      if (in_lmask[l] && in_word[l*16 +: 16] != 0) exp_q.push_back('{val: act_t'(in_word[l*16 +: 16]), idx: in_idx + 16'(l)});
      else if (in_lmask[l]) exp_skip++;
    #2;
    while (!in_ready) begin @(negedge clk); #2; end
    @(posedge clk);
    #1 in_valid = 0;
  endtask
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    fork
      forever begin @(negedge clk); out_ready = ($urandom_range(0, 3) != 0); end
      for (int i = 0; i < 300; i++) begin @(negedge clk); send(0); end
    join_any
    disable fork;
    @(negedge clk); out_ready = 1;
    repeat (8) @(negedge clk);
    // dense stream: 20 words -> 80 entries in about 80 cycles
    begin
      int c0;
      c0 = $time;
      for (int i = 0; i < 20; i++) send(1);
      repeat (6) @(negedge clk);
      dense_cycles = ($time - c0) / 10;
    end
    checks++; if (exp_q.size() != 0) begin failures++; $display("FAIL %0d entries missing", exp_q.size()); end
    checks++; if (skip_tot != exp_skip) begin failures++; $display("FAIL skipped %0d exp %0d", skip_tot, exp_skip); end
    checks++; if (dense_cycles > 90) begin failures++; $display("FAIL dense rate %0d cycles", dense_cycles); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
