// tb_act_sram: writes every bank with random data and lane masks, reads all
// banks in the same cycles and compares with a model, checking that banks are
// independent and that masked lanes keep their old value.
module tb_act_sram;
  logic clk = 1'b0; always #5 clk = ~clk;
  logic en [8], we [8];
  logic [10:0] addr [8];
  logic [63:0] wdata [8], rdata [8];
  logic [3:0] wmask [8];
  logic [63:0] model [8][64];
  int checks = 0, failures = 0;
  act_sram dut (.*);
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int b = 0; b < 8; b++) begin en[b] = 0; we[b] = 0; addr[b] = '0; wdata[b] = '0; wmask[b] = '1; end
    for (int r = 0; r < 64; r++) begin
      @(negedge clk);
      for (int b = 0; b < 8; b++) begin
        en[b] = 1; we[b] = 1; wmask[b] = '1; addr[b] = 11'(r * 31); wdata[b] = {$urandom, $urandom};
        model[b][r] = wdata[b];
      end
    end
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      for (int b = 0; b < 8; b++) begin
        int r;
        r = $urandom_range(0, 63);
        en[b] = 1; we[b] = 1; addr[b] = 11'(r * 31); wdata[b] = {$urandom, $urandom};
        wmask[b] = 4'($urandom);
        for (int l = 0; l < 4; l++) if (wmask[b][l]) model[b][r][l*16 +: 16] = wdata[b][l*16 +: 16];
      end
    end
    for (int r = 0; r < 64; r++) begin
      @(negedge clk);
      for (int b = 0; b < 8; b++) begin en[b] = 1; we[b] = 0; addr[b] = 11'(((r + b) % 64) * 31); end
      @(negedge clk);
      for (int b = 0; b < 8; b++) begin
        en[b] = 0; checks++;
        if (rdata[b] !== model[b][(r + b) % 64]) begin failures++; $display("FAIL bank %0d row %0d", b, r); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
