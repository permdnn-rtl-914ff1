// tb_weight_lut: loads 16 random weights, then decodes random tag vectors and
// compares every lane with the loaded table.
module tb_weight_lut;
  logic clk = 1'b0; always #5 clk = ~clk;
  logic lut_we = 1'b0;
  logic [3:0] lut_addr = '0;
  logic signed [15:0] lut_wdata = '0;
  logic [3:0] tags [8];
  logic signed [15:0] weights [8];
  logic signed [15:0] model [16];
  int checks = 0, failures = 0;
  weight_lut dut (.*);
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int e = 0; e < 16; e++) begin
      @(negedge clk); lut_we = 1; lut_addr = 4'(e); lut_wdata = 16'($urandom); model[e] = lut_wdata;
    end
    @(negedge clk); lut_we = 0;
    for (int i = 0; i < 200; i++) begin
      for (int m = 0; m < 8; m++) tags[m] = 4'($urandom);
      #1;
      for (int m = 0; m < 8; m++) begin
        checks++;
        if (weights[m] !== model[tags[m]]) begin failures++; $display("FAIL lane %0d", m); end
      end
      @(negedge clk);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
