// tb_acc_sel_bank: drives random permutation values, column offsets, slots
// and products for p = 1..16 and checks all 16 accumulators against a model
// that places each product at row slot*p + (PermV + col) mod p. Also checks
// clear, idle cycles (valid low) and saturation.
module tb_acc_sel_bank;
  import permdnn_pkg::*;
  logic clk = 1'b0; always #5 clk = ~clk;
  logic rst_n = 1'b0, clear = 1'b0, valid = 1'b0;
  logic [5:0] permv = '0;
  logic [4:0] col = '0, p = 5'd1;
  logic [3:0] slot = '0;
  logic signed [23:0] product = '0;
  logic signed [23:0] acc [16];
  logic signed [23:0] model [16];
  int checks = 0, failures = 0;
  acc_sel_bank dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  function automatic logic signed [23:0] sat(input longint v);
    if (v > 8388607) return 24'sh7fffff;
    if (v < -8388608) return 24'sh800000;
    return 24'(v);
  endfunction
  task automatic compare();
    for (int r = 0; r < 16; r++) begin
      checks++;
      if (acc[r] !== model[r]) begin
        failures++;
        if (failures < 10) $display("FAIL p=%0d acc[%0d]=%0d exp %0d", p, r, acc[r], model[r]);
      end
    end
  endtask
  initial begin
    repeat (2) @(posedge clk); rst_n = 1;
    for (int pp = 1; pp <= 16; pp++) begin
      @(negedge clk); clear = 1; valid = 0;
      @(negedge clk); clear = 0;
      for (int r = 0; r < 16; r++) model[r] = 0;
      p = 5'(pp);
      for (int i = 0; i < 60; i++) begin
        int s, row;
        s = $urandom_range(0, 16 / pp - 1);
        permv = 6'($urandom_range(0, pp - 1)); col = 5'($urandom_range(0, pp - 1));
        slot = 4'(s); product = 24'($signed($urandom_range(0, 200000)) - 100000);
        valid = ($urandom_range(0, 3) != 0);
        row = s * pp + (int'(permv) + int'(col)) % pp;
        if (valid) model[row] = sat(longint'(model[row]) + longint'(product));
        @(negedge clk);
        compare();
      end
    end
    // saturation
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    for (int r = 0; r < 16; r++) model[r] = 0;
    p = 5'd4; permv = 6'd1; col = 5'd2; slot = 4'd1; valid = 1;
    for (int i = 0; i < 5; i++) begin
      product = 24'sd3000000; model[7] = sat(longint'(model[7]) + 3000000);
      @(negedge clk);
    end
    valid = 0;
    compare();
    checks++; if (acc[7] !== 24'sh7fffff) begin failures++; $display("FAIL saturation"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
