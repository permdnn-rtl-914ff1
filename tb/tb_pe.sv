// tb_pe: one processing element on its own. The bench loads a random weight
// LUT, weight tags and permutation values through the host port, then acts
// as the main controller: a clear, then for each non-zero x_j the K (or, for
// a pass, f) commands of that column, back to back. After the pipeline drains
// it reads every row through the y port and compares with a reference
// computed from the matrix definition (row c of block (R, G) holds the
// non-zero of column G*p + d iff c == (PermV + d) mod p). Covered: p=4 with
// 12 block rows (one pass, idle multipliers in the last cycle), both passes
// of p=10 with 13 block rows, ReLU and tanh, and a 5-cycle result latency.
module tb_pe;
  import permdnn_pkg::*;
  logic clk = 1'b0; always #5 clk = ~clk;
  logic rst_n = 1'b0;
  pe_cmd_t cmd;
  logic [8:0] nbr; logic [4:0] p; act_fn_e act_fn;
  logic host_we = 0; host_sel_e host_sel = HOST_WEIGHT;
  logic [14:0] host_addr = '0; logic [63:0] host_wdata = '0;
  logic [7:0] rd_row = '0;
  act_t y_word [4];
  logic signed [15:0] lut [16];
  logic [3:0] tag [int];
  logic [5:0] pv [int];
  int checks = 0, failures = 0;
  pe dut (.*);
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  task automatic hw(input host_sel_e s, input int a, input logic [63:0] d);
    @(negedge clk); host_we = 1; host_sel = s; host_addr = 15'(a); host_wdata = d;
    @(negedge clk); host_we = 0;
  endtask
  function automatic logic signed [15:0] ref_act(input logic signed [23:0] a, input bit th);
    int m, t;
    if (!th) return (a < 0) ? 16'sd0 : (a > 32767) ? 16'sh7fff : a[15:0];
    m = (a < 0) ? -a : a;
    t = (m < 128) ? m : (m < 384) ? 64 + m / 2 : 256;
    return (a < 0) ? 16'(-t) : 16'(t);
  endfunction
  task automatic layer(input int pp, input int nb, input int n, input bit th, input int qpass);
    int K, f, t0, t1, lo, rows;
    logic signed [15:0] xv [];
    K = (nb + 7) / 8; f = 16 / pp; t0 = qpass * f; t1 = (t0 + f > K) ? K : t0 + f;
    xv = new[n];
    for (int e = 0; e < 16; e++) begin lut[e] = 16'($signed($urandom_range(0, 1023)) - 512); hw(HOST_LUT, e, 64'(lut[e]) & 64'hffff); end
    for (int a = 0; a < n * K; a++) begin
      logic [31:0] row;
      for (int m = 0; m < 8; m++) begin tag[a*8 + m] = 4'($urandom); row[m*4 +: 4] = tag[a*8 + m]; end
      hw(HOST_WEIGHT, a, 64'(row));
    end
    for (int a = 0; a < ((n + pp - 1) / pp) * K; a++) begin
      logic [47:0] row;
      for (int m = 0; m < 8; m++) begin pv[a*8 + m] = 6'($urandom_range(0, pp - 1)); row[m*6 +: 6] = pv[a*8 + m]; end
      hw(HOST_PERM, a, 64'(row));
    end
    for (int j = 0; j < n; j++) xv[j] = $urandom_range(0, 1) ? 16'($signed($urandom_range(0, 2047)) - 1024) : 16'sd0;
    nbr = 9'(nb); p = 5'(pp); act_fn = th ? ACT_TANH : ACT_RELU;
    @(negedge clk); cmd = '0; cmd.clear = 1;
    @(negedge clk); cmd = '0;
    for (int j = 0; j < n; j++)
      if (xv[j] != 0)
        for (int t = t0; t < t1; t++) begin
          cmd.valid = 1; cmd.x = xv[j]; cmd.d = 5'(j % pp); cmd.t = 8'(t); cmd.slot = 4'(t - t0);
          cmd.waddr = 15'(j * K + t); cmd.paddr = 11'((j / pp) * K + t);
          @(negedge clk);
        end
    cmd = '0;
    // a result appears 4 clock edges after its command; check at 3 and 4
    repeat (4) @(negedge clk);
    lo = t0 * 8 * pp; rows = ((t1 * 8 * pp > nb * pp) ? nb * pp : t1 * 8 * pp) - lo;
    for (int rr = 0; rr < rows; rr += 4) begin
      rd_row = 8'(rr); #1;
      for (int l = 0; l < 4 && rr + l < rows; l++) begin
        int o, R, c, t, m;
        logic signed [23:0] acc;
        o = lo + rr + l; R = o / pp; c = o % pp; t = R / 8; m = R % 8;
        acc = 0;
        for (int j = 0; j < n; j++)
          if (xv[j] != 0 && (int'(pv[((j / pp) * K + t) * 8 + m]) + j % pp) % pp == c) begin
            logic signed [31:0] pr;
            pr = 32'(xv[j]) * 32'(lut[tag[(j * K + t) * 8 + m]]);
            acc = acc + 24'(pr >>> 8);
          end
        checks++;
        if (y_word[l] !== ref_act(acc, th)) begin
          failures++; if (failures < 10) $display("FAIL p=%0d row %0d: %0d exp %0d", pp, o, y_word[l], ref_act(acc, th));
        end
      end
    end
  endtask
  initial begin
    cmd = '0; nbr = '0; p = 5'd1; act_fn = ACT_RELU;
    repeat (2) @(posedge clk); rst_n = 1;
    layer(4, 12, 40, 0, 0);
    layer(10, 13, 30, 1, 0);
    layer(10, 13, 30, 0, 1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
