// tb_main_ctrl: the read path, FIFO and routing network are replaced by
// simple models (a queue that fills at a random rate, a routing network that
// is busy for a few cycles). For a single-pass layer (p=4, nbr=16) and a
// two-pass layer (p=10, nbr=13) the bench records every command sent to the
// PEs and compares it with the expected sequence: per pass one clear, then
// for every non-zero x_j the cycles t = q*f .. min(K,(q+1)f)-1 with
// x, j mod p, slot, weight row j*K+t and permutation row (j div p)*K+t. It
// checks the routing offsets and row counts of each pass, the 'done' pulse,
// back-to-back issue (one cycle per command while the FIFO has data) and
// the counters.
module tb_main_ctrl;
  import permdnn_pkg::*;
  logic clk = 1'b0; always #5 clk = ~clk;
  logic rst_n = 1'b0, start = 0, busy, done, rd_start, rd_done, fifo_empty, fifo_pop;
  layer_cfg_t cfg;
  xent_t fifo_head;
  pe_cmd_t cmd;
  logic rt_start, rt_done;
  logic [15:0] rt_lo, stride; logic [7:0] rt_rows;
  logic [31:0] n_cols, n_passes, n_starve;
  xent_t src [$];  // the non-zero x of the layer
  xent_t q [$];    // model FIFO
  pe_cmd_t got [$];
  int src_ptr = 0, rt_busy = 0, checks = 0, failures = 0, rt_seen = 0, max_gap = 0, gap = 0;
  int rt_lo_seen [4], rt_rows_seen [4];
  bit feeding = 0;
  main_ctrl dut (.*);

  assign fifo_empty = (q.size() == 0);
  assign fifo_head  = fifo_empty ? '0 : q[0];
  assign rd_done    = !feeding && !rd_start;
  assign rt_done    = (rt_busy == 0) && !rt_start;

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // the models sample the controller's outputs at the clock edge and update
  // their own state just after it, so the controller never sees a change
  // in the same edge
  always @(posedge clk) begin
    bit pop_s, rd_s, rt_s;
    logic [15:0] lo_s; logic [7:0] rows_s;
    pe_cmd_t c_s;
    pop_s = fifo_pop; rd_s = rd_start; rt_s = rt_start; lo_s = rt_lo; rows_s = rt_rows; c_s = cmd;
    #1;
    if (pop_s) void'(q.pop_front());
    if (rd_s) begin feeding = 1; src_ptr = 0; end
    else if (feeding) begin
      if (src_ptr < src.size() && $urandom_range(0, 3) != 0) begin q.push_back(src[src_ptr]); src_ptr++; end
      if (src_ptr == src.size()) feeding = 0;
    end
    if (rt_s) begin
      rt_busy = 5;
      if (rt_seen < 4) begin rt_lo_seen[rt_seen] = int'(lo_s); rt_rows_seen[rt_seen] = int'(rows_s); end
      rt_seen++;
    end else if (rt_busy > 0) rt_busy = rt_busy - 1;
    if (c_s.valid || c_s.clear) got.push_back(c_s);
  end

  task automatic chk(input bit ok, input string what);
    checks++; if (!ok) begin failures++; if (failures < 15) $display("FAIL %s (p=%0d, %0d cmds)", what, cfg.p, got.size()); end
  endtask

  task automatic run(input int p, input int nbr, input int n);
    int K, f, P, k;
    src.delete(); got.delete(); rt_seen = 0;
    for (int j = 0; j < n; j++)
      if ($urandom_range(0, 1)) src.push_back('{val: act_t'($urandom_range(1, 999)), idx: 16'(j)});
    cfg = '0; cfg.n_in = 17'(n); cfg.nbr = 9'(nbr); cfg.p = 5'(p);
    cfg.w_base = 15'd100; cfg.perm_base = 11'd7;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(posedge clk);
    @(negedge clk);
    K = (nbr + 7) / 8; f = 16 / p; P = (K + f - 1) / f;
    k = 0;
    for (int qq = 0; qq < P; qq++) begin
      int t0, t1;
      t0 = qq * f; t1 = (t0 + f > K) ? K : t0 + f;
      chk(k < got.size() && got[k].clear && !got[k].valid, "clear at pass start"); k++;
      foreach (src[s])
        for (int t = t0; t < t1; t++) begin
          int j;
          j = int'(src[s].idx);
          if (k >= got.size()) begin chk(0, "missing command"); break; end
          chk(got[k].valid && got[k].x == src[s].val && int'(got[k].d) == j % p &&
              int'(got[k].t) == t && int'(got[k].slot) == t - t0 &&
              int'(got[k].waddr) == 100 + j * K + t && int'(got[k].paddr) == 7 + (j / p) * K + t,
              $sformatf("command j=%0d t=%0d", j, t));
          k++;
        end
      chk(rt_lo_seen[qq] == t0 * 8 * p, "routing offset");
      chk(rt_rows_seen[qq] == ((t1 * 8 * p > nbr * p) ? nbr * p : t1 * 8 * p) - t0 * 8 * p, "routing rows");
    end
    chk(k == got.size(), "extra commands");
    chk(rt_seen == P && int'(n_passes) == P, "pass count");
    chk(int'(n_cols) == P * src.size(), "column count");
    chk(int'(stride) == (nbr * p + 3) / 4 * 4, "stride");
  endtask

  // issue rate: while the FIFO holds entries, commands must be back to back
  always @(posedge clk) begin
    if (busy && dut.state == dut.S_STREAM && q.size() > 2 && !cmd.valid && !cmd.clear) gap++;
  end

  initial begin
    cfg = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    run(4, 16, 60);
    run(10, 13, 50);
    run(8, 8, 64);
    chk(gap < 8, "back-to-back issue");
    chk(n_starve > 0, "starvation counted");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
