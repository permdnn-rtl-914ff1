// tb_pe_ctrl: issues random commands and checks that the SRAM port follows
// the command (or the host when no command is valid), that the weight
// register enable comes 1 cycle later, x 2 cycles later and the accumulate
// controls 3 cycles later, and that multiplier m is enabled only when
// t*8 + m < nbr.
module tb_pe_ctrl;
  import permdnn_pkg::*;
  logic clk = 1'b0; always #5 clk = ~clk;
  logic rst_n = 1'b0;
  pe_cmd_t cmd;
  logic [8:0] nbr;
  logic host_wsram_we = 0, host_psram_we = 0;
  logic [14:0] host_addr = '0;
  logic wsram_en, wsram_we, psram_en, psram_we, wreg_en, mul_valid, acc_clear;
  logic [14:0] wsram_addr; logic [10:0] psram_addr;
  act_t mul_x; logic [7:0] acc_valid; logic [4:0] acc_d; logic [3:0] acc_slot;
  pe_cmd_t hist [$];
  int checks = 0, failures = 0;
  pe_ctrl dut (.*);
  initial begin
    repeat (10000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask
  initial begin
    cmd = '0; nbr = 9'd13;
    for (int i = 0; i < 4; i++) hist.push_front('0);
    repeat (2) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 300; i++) begin
      @(negedge clk);
      cmd = pe_cmd_t'({$urandom, $urandom, $urandom});
      cmd.valid = ($urandom_range(0, 3) != 0);
      cmd.clear = ($urandom_range(0, 15) == 0);
      cmd.t = 8'($urandom_range(0, 2));
      host_wsram_we = $urandom_range(0, 1); host_psram_we = $urandom_range(0, 1);
      host_addr = 15'($urandom);
      hist.push_front(cmd); void'(hist.pop_back());
      #1;
      chk(wsram_en == (cmd.valid || host_wsram_we), "wsram_en");
      chk(wsram_we == (!cmd.valid && host_wsram_we), "wsram_we");
      chk(wsram_addr == (cmd.valid ? cmd.waddr : host_addr), "wsram_addr");
      chk(psram_addr == (cmd.valid ? cmd.paddr : host_addr[10:0]), "psram_addr");
      chk(psram_we == (!cmd.valid && host_psram_we), "psram_we");
      if (i >= 4) begin
        chk(wreg_en == hist[1].valid, "wreg_en");
        chk(mul_valid == hist[2].valid && mul_x == hist[2].x, "mul stage");
        chk(acc_clear == hist[3].clear && acc_d == hist[3].d && acc_slot == hist[3].slot, "acc stage");
        for (int m = 0; m < 8; m++)
          chk(acc_valid[m] == (hist[3].valid && (int'(hist[3].t) * 8 + m < 13)), "lane enable");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
