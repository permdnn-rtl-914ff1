// tb_permdnn_top: end-to-end test of the PermDNN engine at its default size
// (32 PEs, 8 multipliers and 128 accumulators per PE).
//
// For each layer the bench draws a random block-permuted diagonal matrix
// (random permutation values and weight tags, a random 16-entry weight LUT)
// and a sparse random x, loads them through the host port, runs the layer and
// reads every y (and the zero padding between PE regions) back from the
// activation SRAM. The expected y is computed here from the matrix definition
//     W[r*nbr*p + R*p + c][G*p + d] = LUT[tag] if c == (PermV(R,G) + d) mod p
// independently of the engine's schedule. Layers cover: Case 1 (one pass)
// and Case 2 (several passes), ReLU and tanh, idle multipliers when nbr is
// not a multiple of 8, vector lengths that are not a multiple of 4, a dense
// x (FIFO back-pressure) and a very sparse x (PE starvation), and a last
// layer that reads the fourth layer's output in place. Each mechanism must
// occur at least once or a failure is counted.
module tb_permdnn_top;
  import permdnn_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0, busy, done;
  layer_cfg_t cfg;
  logic host_we = 1'b0, host_re = 1'b0;
  host_sel_e host_sel = HOST_WEIGHT;
  logic [4:0] host_pe = '0;
  logic [AIDX_W-1:0] host_addr = '0;
  logic [W_ACTM-1:0] host_wdata = '0, host_rdata;
  logic [31:0] n_cols, n_passes, n_starve, n_zero_skipped, n_conflicts, n_fifo_full;

  permdnn_top dut (.*);

  int checks = 0, failures = 0;
  int seen_case2 = 0, seen_case1 = 0, seen_skip = 0, seen_conflict = 0, seen_full = 0,
      seen_starve = 0, seen_tanh = 0, seen_relu = 0, seen_idle_mul = 0, seen_chain = 0;

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- reference model state ----------------
  logic signed [15:0] lut   [N_PE][16];
  logic [3:0]         tagm  [N_PE][];      // [row*8 + lane]
  logic [5:0]         permm [N_PE][];
  logic signed [15:0] actm  [65536];       // mirror of the activation SRAM

  task automatic host_write(input host_sel_e sel, input int pe_i, input int addr,
                            input logic [63:0] data);
    @(negedge clk);
    host_we = 1'b1; host_sel = sel; host_pe = 5'(pe_i);
    host_addr = 16'(addr); host_wdata = data;
    @(negedge clk);
    host_we = 1'b0;
  endtask

  task automatic host_read(input int waddr, output logic [63:0] data);
    @(negedge clk);
    host_re = 1'b1; host_addr = 16'(waddr);
    @(negedge clk);
    host_re = 1'b0;
    #1 data = host_rdata;
  endtask

  function automatic logic signed [23:0] sat_add24(input logic signed [23:0] a, input logic signed [23:0] b);
    logic signed [24:0] s;
    s = 25'(a) + 25'(b);
    if (s > 25'sd8388607) return 24'sh7fffff;
    if (s < -25'sd8388608) return 24'sh800000;
    return s[23:0];
  endfunction

  function automatic logic signed [15:0] ref_act(input logic signed [23:0] a, input bit tanh_fn);
    logic signed [23:0] mag, t;
    if (!tanh_fn) begin
      if (a < 0) return 0;
      if (a > 32767) return 16'sh7fff;
      return a[15:0];
    end
    mag = (a < 0) ? -a : a;
    if (mag < 128) t = mag;
    else if (mag < 384) t = 64 + mag / 2;
    else t = 256;
    return (a < 0) ? -t[15:0] : t[15:0];
  endfunction

  // run one layer; weights/permutations are drawn and loaded unless reuse_x
  task automatic run_layer(input int p, input int nbr, input int n, input int density_pct,
                           input bit tanh_fn, input int in_base, input int out_base,
                           input bit x_from_sram);
    int K, nr, stride, ncol_blk, nwords;
    int exp_cols;
    logic [63:0] d64;
    logic signed [23:0] acc;
    logic signed [15:0] xv [];
    logic signed [15:0] expy;
    int cyc;

    K = (nbr + 7) / 8;
    nr = nbr * p;
    stride = (nr + 3) / 4 * 4;
    ncol_blk = (n + p - 1) / p;
    xv = new[n];

    // LUT, tags and permutation values for every PE
    for (int r = 0; r < N_PE; r++) begin
      tagm[r]  = new[n * K * 8];
      permm[r] = new[ncol_blk * K * 8];
      for (int e = 0; e < 16; e++) begin
        lut[r][e] = 16'($signed($urandom_range(0, 1023)) - 512);
        host_write(HOST_LUT, r, e, 64'(lut[r][e]) & 64'hffff);
      end
      for (int j = 0; j < n; j++)
        for (int t = 0; t < K; t++) begin
          logic [31:0] row;
          for (int m = 0; m < 8; m++) begin
            tagm[r][(j*K + t)*8 + m] = 4'($urandom);
            row[m*4 +: 4] = tagm[r][(j*K + t)*8 + m];
          end
          host_write(HOST_WEIGHT, r, j*K + t, 64'(row));
        end
      for (int g = 0; g < ncol_blk; g++)
        for (int t = 0; t < K; t++) begin
          logic [47:0] row;
          for (int m = 0; m < 8; m++) begin
            permm[r][(g*K + t)*8 + m] = 6'($urandom_range(0, p - 1));
            row[m*6 +: 6] = permm[r][(g*K + t)*8 + m];
          end
          host_write(HOST_PERM, r, g*K + t, 64'(row));
        end
    end

    // input vector
    exp_cols = 0;
    for (int j = 0; j < n; j++) begin
      if (x_from_sram) xv[j] = actm[in_base + j];
      else begin
        if ($urandom_range(0, 99) < density_pct) xv[j] = 16'($signed($urandom_range(0, 2047)) - 1024);
        else xv[j] = 0;
        if (xv[j] == 0 && j % 5 == 0 && density_pct == 100) xv[j] = 16'sd3;
        actm[in_base + j] = xv[j];
      end
      if (xv[j] != 0) exp_cols++;
    end
    if (!x_from_sram) begin
      nwords = (n + 3) / 4;
      for (int w = 0; w < nwords; w++) begin
        for (int l = 0; l < 4; l++) d64[l*16 +: 16] = (w*4 + l < n) ? xv[w*4 + l] : 16'd0;
        host_write(HOST_ACT, 0, in_base/4 + w, d64);
      end
    end

    // run
    cfg.n_in = 17'(n); cfg.nbr = 9'(nbr); cfg.p = 5'(p);
    cfg.in_base = 16'(in_base); cfg.out_base = 16'(out_base);
    cfg.w_base = '0; cfg.perm_base = '0;
    cfg.act_fn = tanh_fn ? ACT_TANH : ACT_RELU;
    @(negedge clk); start = 1'b1; @(negedge clk); start = 1'b0;
    cyc = 0;
    while (!done) begin @(posedge clk); cyc++; end
    @(negedge clk);

    // expected passes and columns
    checks++;
    if (n_cols != 32'(exp_cols * ((K + (16/p) - 1) / (16/p)))) begin
      failures++; $display("FAIL columns issued %0d, expected %0d", n_cols, exp_cols * ((K + (16/p) - 1) / (16/p)));
    end
    checks++;
    if (n_passes != 32'((K + (16/p) - 1) / (16/p))) begin
      failures++; $display("FAIL passes %0d", n_passes);
    end
    if (n_passes > 1) seen_case2++; else seen_case1++;
    if (n_zero_skipped > 0) seen_skip++;
    checks++;
    if (n_zero_skipped != 32'((n - exp_cols) * n_passes)) begin
      failures++; $display("FAIL zeros skipped %0d", n_zero_skipped);
    end
    if (n_conflicts > 0) seen_conflict++;
    if (n_fifo_full > 0) seen_full++;
    if (n_starve > 0) seen_starve++;
    if (tanh_fn) seen_tanh++; else seen_relu++;
    if (nbr % 8 != 0) seen_idle_mul++;
    if (x_from_sram) seen_chain++;

    // compare every output row and the padding
    for (int r = 0; r < N_PE; r++)
      for (int o = 0; o < stride; o++) begin
        if (o < nr) begin
          int R, c, t, m;
          R = o / p; c = o % p; t = R / 8; m = R % 8;
          acc = 0;
          for (int j = 0; j < n; j++) begin
            int g, dd, pv;
            g = j / p; dd = j % p;
            pv = permm[r][(g*K + t)*8 + m];
            if (xv[j] != 0 && (pv + dd) % p == c) begin
              logic signed [31:0] pr;
              pr = 32'(xv[j]) * 32'(lut[r][tagm[r][(j*K + t)*8 + m]]);
              acc = sat_add24(acc, 24'(pr >>> 8));
            end
          end
          expy = ref_act(acc, tanh_fn);
        end else expy = 0;
        actm[out_base + r*stride + o] = expy;
      end
    for (int a = out_base / 4; a < (out_base + N_PE*stride + 3) / 4; a++) begin
      host_read(a, d64);
      for (int l = 0; l < 4; l++) begin
        int ai;
        ai = a*4 + l;
        if (ai < out_base + N_PE*stride) begin
          checks++;
          if ($signed(d64[l*16 +: 16]) != actm[ai]) begin
            failures++;
            if (failures < 10) $display("FAIL y[%0d] = %0d expected %0d", ai - out_base,
                                        $signed(d64[l*16 +: 16]), actm[ai]);
          end
        end
      end
    end
    $display("layer p=%0d nbr=%0d n=%0d: %0d cycles, cols=%0d passes=%0d skipped=%0d conflicts=%0d fifo_full=%0d starve=%0d",
             p, nbr, n, cyc, n_cols, n_passes, n_zero_skipped, n_conflicts, n_fifo_full, n_starve);
  endtask

  initial begin
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // Case 1, ReLU, 50% dense x, n not a multiple of 4
    run_layer(4, 16, 46, 50, 1'b0, 0, 4096, 1'b0);
    // Case 2 (p=10: one block per bank, 2 passes), tanh, idle multipliers (nbr=13)
    run_layer(10, 13, 40, 40, 1'b1, 8192, 16384, 1'b0);
    // dense x with K=2: FIFO fills; p=8, nbr=16
    run_layer(8, 16, 96, 100, 1'b0, 24576, 28672, 1'b0);
    // very sparse x, K=1: PEs wait for the FIFO
    run_layer(8, 8, 128, 5, 1'b1, 32768, 36864, 1'b0);
    // second layer reads the first layer's output (stride-spaced) in place
    run_layer(4, 8, 256, 0, 1'b0, 36864, 40960, 1'b1);

    checks++; if (seen_case1 == 0)    begin failures++; $display("FAIL no single-pass layer"); end
    checks++; if (seen_case2 == 0)    begin failures++; $display("FAIL no multi-pass layer"); end
    checks++; if (seen_skip == 0)     begin failures++; $display("FAIL no zero skipped"); end
    checks++; if (seen_conflict == 0) begin failures++; $display("FAIL no routing conflict"); end
    checks++; if (seen_full == 0)     begin failures++; $display("FAIL FIFO never full"); end
    checks++; if (seen_starve == 0)   begin failures++; $display("FAIL PEs never waited"); end
    checks++; if (seen_tanh == 0 || seen_relu == 0) begin failures++; $display("FAIL activation modes"); end
    checks++; if (seen_idle_mul == 0) begin failures++; $display("FAIL no idle multiplier"); end
    checks++; if (seen_chain == 0)    begin failures++; $display("FAIL no chained layer"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
