// tb_act_routing: 32 model PEs present y = f(PE, row) on their read ports;
// the bench runs passes of different sizes and offsets, records every bank
// write (checking one write per bank per cycle by construction of the model
// memory) and then checks that every y landed at out_base + r*stride + lo + i
// and that lanes past the pass are written as zero. It also checks that bank
// conflicts occur and are resolved, and the best-case rate of 8 words/cycle.
module tb_act_routing;
  import permdnn_pkg::*;
  logic clk = 1'b0; always #5 clk = ~clk;
  logic rst_n = 1'b0, start = 0, done;
  logic [15:0] out_base = '0, stride = '0, lo = '0;
  logic [7:0] pass_rows = '0;
  logic [7:0] rd_row [32];
  act_t y_word [32][4];
  logic wr_en [8]; logic [10:0] wr_addr [8]; logic [63:0] wr_data [8];
  logic [3:0] conflicts;
  logic [15:0] mem [int];
  int checks = 0, failures = 0, conf_tot = 0, cyc = 0;
  act_routing dut (.*);
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  always_comb
    for (int r = 0; r < 32; r++)
      for (int l = 0; l < 4; l++) y_word[r][l] = act_t'(r * 1000 + int'(lo) + int'(rd_row[r]) + l + 1);
  always @(posedge clk) begin
    for (int b = 0; b < 8; b++)
      if (wr_en[b])
        for (int l = 0; l < 4; l++) mem[(int'(wr_addr[b]) * 8 + b) * 4 + l] = wr_data[b][l*16 +: 16];
    conf_tot += int'(conflicts);
  end
  task automatic pass(input int base, input int str, input int lo_i, input int rows);
    @(negedge clk); out_base = 16'(base); stride = 16'(str); lo = 16'(lo_i); pass_rows = 8'(rows); start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    for (int r = 0; r < 32; r++)
      for (int i = 0; i < (rows + 3) / 4 * 4; i++) begin
        int a, e;
        a = base + r * str + lo_i + i;
        e = (i < rows) ? r * 1000 + lo_i + i + 1 : 0;
        checks++;
        if (!mem.exists(a) || mem[a] != 16'(e)) begin
          failures++; if (failures < 10) $display("FAIL a=%0d r=%0d i=%0d", a, r, i);
        end
      end
  endtask
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    pass(0, 128, 0, 128);               // aligned PEs: staggered, no conflicts
    checks++; if (cyc > 4 * 32 + 3) begin failures++; $display("FAIL rate %0d cycles", cyc); end
    pass(8192, 132, 0, 80);             // p=10 style pass 1
    pass(8192, 132, 80, 50);            // pass 2, partial last word
    pass(20000, 20, 0, 18);             // few words per PE
    checks++; if (conf_tot == 0) begin failures++; $display("FAIL no conflict exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
