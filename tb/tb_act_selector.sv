// tb_act_selector: a behavioural model of the 8 interleaved activation banks
// (one-cycle read, output held until the next read) answers the selector's
// reads. The bench checks, under random back-pressure, that the words of a
// vector come out in order with the right data, lane-0 index and in-range
// lane mask, that only one bank is read per cycle, and that 'done' rises at
// the end; and that with no back-pressure it delivers one word per cycle.
module tb_act_selector;
  logic clk = 1'b0; always #5 clk = ~clk;
  logic rst_n = 1'b0, start = 0, rd_en [8], out_valid, out_ready = 0, done;
  logic [15:0] in_base = '0; logic [16:0] n_in = '0;
  logic [10:0] rd_addr;
  logic [63:0] rd_data [8], out_word;
  logic [15:0] out_idx; logic [3:0] out_lmask;
  logic [63:0] mem [8][256];
  int checks = 0, failures = 0, got = 0, ncyc = 0;
  bit hold_random = 1;
  act_selector dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always @(posedge clk) begin
    int ne;
    ne = 0;
    for (int b = 0; b < 8; b++) if (rd_en[b]) begin rd_data[b] <= mem[b][rd_addr]; ne++; end
    if (ne > 1) begin failures++; $display("FAIL two banks read"); end
  end
  task automatic run(input int base, input int n);
    int exp_words, w;
    @(negedge clk); in_base = 16'(base); n_in = 17'(n); start = 1;
    @(negedge clk); start = 0;
    exp_words = (n + 3) / 4; w = 0; ncyc = 0;
    while (w < exp_words) begin
      out_ready = hold_random ? ($urandom_range(0, 2) != 0) : 1'b1;
      @(posedge clk); ncyc++;
      if (out_valid && out_ready) begin
        int g;
        g = base / 4 + w;
        checks++;
        if (out_word !== mem[g % 8][g / 8] || out_idx != 16'(w * 4)) begin
          failures++; $display("FAIL word %0d", w);
        end
        for (int l = 0; l < 4; l++) begin
          checks++; if (out_lmask[l] != (w*4 + l < n)) begin failures++; $display("FAIL lmask"); end
        end
        w++;
      end
      @(negedge clk);
    end
    out_ready = 0;
    @(negedge clk); @(negedge clk);
    checks++; if (!done || out_valid) begin failures++; $display("FAIL done"); end
  endtask
  initial begin
    for (int b = 0; b < 8; b++) for (int r = 0; r < 256; r++) mem[b][r] = {$urandom, $urandom};
    for (int b = 0; b < 8; b++) rd_data[b] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    run(0, 37);
    run(4 * 13, 100);
    hold_random = 0;
    run(4 * 5, 128);
    checks++; if (ncyc > 34) begin failures++; $display("FAIL rate: %0d cycles for 32 words", ncyc); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
