// tb_perm_sram: writes random 48-bit rows, reads them back and checks each
// 6-bit permutation field, with one cycle of read latency.
module tb_perm_sram;
  logic clk = 1'b0; always #5 clk = ~clk;
  logic en = 1'b0, we = 1'b0;
  logic [10:0] addr = '0;
  logic [47:0] wdata = '0;
  logic [5:0] permv [8];
  int checks = 0, failures = 0;
  logic [47:0] model [2048];
  perm_sram dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 2048; i += 7) begin
      @(negedge clk); en = 1; we = 1; addr = 11'(i); wdata = {$urandom, $urandom}; model[i] = wdata;
    end
    @(negedge clk); en = 0; we = 0;
    for (int i = 0; i < 2048; i += 7) begin
      @(negedge clk); en = 1; we = 0; addr = 11'(i);
      @(negedge clk); en = 0;
      for (int m = 0; m < 8; m++) begin
        checks++;
        if (permv[m] !== model[i][m*6 +: 6]) begin failures++; $display("FAIL row %0d field %0d", i, m); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
