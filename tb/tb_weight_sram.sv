// tb_weight_sram: writes random rows spread over all sub-banks, reads them
// back in random order and checks the data, the one-cycle read latency and
// that the output holds between reads.
module tb_weight_sram;
  logic clk = 1'b0; always #5 clk = ~clk;
  logic en = 1'b0, we = 1'b0;
  logic [14:0] addr = '0;
  logic [31:0] wdata = '0, rdata;
  int checks = 0, failures = 0;
  logic [31:0] model [int];
  weight_sram dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    int a [200];
    for (int i = 0; i < 200; i++) begin
      a[i] = (i < 16) ? i * 2048 + i : $urandom_range(0, 32767);
      @(negedge clk); en = 1; we = 1; addr = 15'(a[i]); wdata = $urandom; model[a[i]] = wdata;
    end
    @(negedge clk); en = 0; we = 0;
    for (int i = 0; i < 400; i++) begin
      int k;
      k = a[$urandom_range(0, 199)];
      @(negedge clk); en = 1; we = 0; addr = 15'(k);
      @(negedge clk); en = 0;
      checks++; if (rdata !== model[k]) begin failures++; $display("FAIL addr %0d", k); end
      addr = 15'($urandom); // address moves on, no read: output must hold
      @(negedge clk);
      checks++; if (rdata !== model[k]) begin failures++; $display("FAIL hold addr %0d", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
