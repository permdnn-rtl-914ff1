// tb_workloads: the engine at its default size running published
// fully-connected layer shapes end to end.
//
// Each workload is a layer of m outputs and n inputs with p x p permuted
// diagonal blocks: NMT-1 (2048 x 1024, p = 8, dense input, one pass) and
// Alex-FC7 (4096 x 4096, p = 10, 20.6 % non-zero input, two passes). The
// other shapes differ from these only in size and run the same way (the
// largest, 4096 x 9216, is left out only to keep the run short). The block rows are spread over
// the 32 PEs as nbr = ceil(ceil(m/p)/32) per PE; block rows past ceil(m/p)
// are padding and get weight tag 0, whose table entry is 0. Weights, permutation
// values and x are random. The bench loads everything through the host port
// (one write per cycle), runs the layer, and reads back every output. The
// reference walks the non-zero columns in order and adds into the row
//     PE r, block row R, row (PermV + j mod p) mod p
// with the same saturating 24-bit arithmetic, so it shares no code with the
// engine's schedule. It also checks the numbers of passes, issued columns
// and skipped zeros, and that a pass issues a column in about K cycles:
// the streaming time must stay below (non-zero columns x K + words of x) x
// passes plus a fixed overhead.
module tb_workloads;
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

  initial begin
    repeat (20000000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic signed [15:0] lut   [N_PE][16];
  logic [3:0]         tagm  [N_PE][];      // [(j*K + t)*8 + lane]
  logic [5:0]         permm [N_PE][];      // [(G*K + t)*8 + lane]
  logic signed [23:0] accm  [N_PE][];      // reference accumulators

  // one host write per clock; the caller lowers host_we after a burst
  task automatic hw(input host_sel_e sel, input int pe_i, input int addr,
                    input logic [63:0] data);
    @(negedge clk);
    host_we = 1'b1; host_sel = sel; host_pe = 5'(pe_i);
    host_addr = 16'(addr); host_wdata = data;
  endtask

  task automatic hw_end();
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

  function automatic logic signed [15:0] relu16(input logic signed [23:0] a);
    if (a < 0) return 0;
    if (a > 32767) return 16'sh7fff;
    return a[15:0];
  endfunction

  task automatic run_workload(input string name, input int m, input int n, input int p,
                              input int density_pm);
    int nblk, nbr, K, f, passes, nr, stride, ncol_blk, nz, cyc, bound;
    int in_base, out_base;
    logic signed [15:0] xv [];
    logic [63:0] d64;

    nblk = (m + p - 1) / p;
    nbr = (nblk + N_PE - 1) / N_PE;
    K = (nbr + 7) / 8;
    f = 16 / p;
    passes = (K + f - 1) / f;
    nr = nbr * p;
    stride = (nr + 3) / 4 * 4;
    ncol_blk = (n + p - 1) / p;
    in_base = 0;
    out_base = (n + 31) / 32 * 32;
    xv = new[n];

    for (int r = 0; r < N_PE; r++) begin
      tagm[r]  = new[n * K * 8];
      permm[r] = new[ncol_blk * K * 8];
      accm[r]  = new[nr];
      for (int o = 0; o < nr; o++) accm[r][o] = 0;
      for (int e = 0; e < 16; e++) begin
        lut[r][e] = (e == 0) ? 16'sd0 : 16'($signed($urandom_range(0, 511)) - 256);
        hw(HOST_LUT, r, e, 64'(lut[r][e]) & 64'hffff);
      end
      for (int j = 0; j < n; j++)
        for (int t = 0; t < K; t++) begin
          logic [31:0] row;
          for (int l = 0; l < 8; l++) begin
            int R;
            R = t*8 + l;
            if (R < nbr && r*nbr + R < nblk) tagm[r][(j*K + t)*8 + l] = 4'($urandom_range(1, 15));
            else tagm[r][(j*K + t)*8 + l] = 4'd0;
            row[l*4 +: 4] = tagm[r][(j*K + t)*8 + l];
          end
          hw(HOST_WEIGHT, r, j*K + t, 64'(row));
        end
      for (int g = 0; g < ncol_blk; g++)
        for (int t = 0; t < K; t++) begin
          logic [47:0] row;
          for (int l = 0; l < 8; l++) begin
            permm[r][(g*K + t)*8 + l] = 6'($urandom_range(0, p - 1));
            row[l*6 +: 6] = permm[r][(g*K + t)*8 + l];
          end
          hw(HOST_PERM, r, g*K + t, 64'(row));
        end
    end

    nz = 0;
    for (int j = 0; j < n; j++) begin
      if ($urandom_range(0, 999) < density_pm) xv[j] = 16'($signed($urandom_range(1, 1023)) - 512);
      else xv[j] = 0;
      if (density_pm == 1000 && xv[j] == 0) xv[j] = 16'sd1;
      if (xv[j] != 0) nz++;
    end
    for (int w = 0; w < (n + 3) / 4; w++) begin
      for (int l = 0; l < 4; l++) d64[l*16 +: 16] = (w*4 + l < n) ? xv[w*4 + l] : 16'd0;
      hw(HOST_ACT, 0, in_base/4 + w, d64);
    end
    hw_end();

    // reference: non-zero columns in order, one product per block row
    for (int j = 0; j < n; j++)
      if (xv[j] != 0)
        for (int r = 0; r < N_PE; r++)
          for (int R = 0; R < nbr; R++) begin
            int t, l, c;
            logic signed [31:0] pr;
            t = R / 8; l = R % 8;
            c = (permm[r][((j / p)*K + t)*8 + l] + j % p) % p;
            pr = 32'(xv[j]) * 32'(lut[r][tagm[r][(j*K + t)*8 + l]]);
            accm[r][R*p + c] = sat_add24(accm[r][R*p + c], 24'(pr >>> 8));
          end

    cfg.n_in = 17'(n); cfg.nbr = 9'(nbr); cfg.p = 5'(p);
    cfg.in_base = 16'(in_base); cfg.out_base = 16'(out_base);
    cfg.w_base = '0; cfg.perm_base = '0;
    cfg.act_fn = ACT_RELU;
    @(negedge clk); start = 1'b1; @(negedge clk); start = 1'b0;
    cyc = 0;
    while (!done) begin @(posedge clk); cyc++; end
    @(negedge clk);

    checks++;
    if (n_passes != 32'(passes)) begin failures++; $display("FAIL %s passes %0d, expected %0d", name, n_passes, passes); end
    checks++;
    if (n_cols != 32'(nz * passes)) begin failures++; $display("FAIL %s columns %0d, expected %0d", name, n_cols, nz * passes); end
    checks++;
    if (n_zero_skipped != 32'((n - nz) * passes)) begin failures++; $display("FAIL %s zeros skipped %0d", name, n_zero_skipped); end
    // streaming time: K cycles per non-zero column at most, one cycle per
    // word of x, plus clear/drain/write-back per pass
    bound = passes * (nz * K + (n + 3) / 4 + 64 + (N_PE / N_ACTMB) * ((stride + 3) / 4) * 2 + 64);
    checks++;
    if (cyc > bound) begin failures++; $display("FAIL %s took %0d cycles, bound %0d", name, cyc, bound); end

    for (int a = out_base / 4; a < (out_base + N_PE*stride) / 4; a++) begin
      host_read(a, d64);
      for (int l = 0; l < 4; l++) begin
        int ai, r, o;
        logic signed [15:0] expy;
        ai = a*4 + l - out_base;
        r = ai / stride; o = ai % stride;
        expy = (o < nr) ? relu16(accm[r][o]) : 16'sd0;
        checks++;
        if ($signed(d64[l*16 +: 16]) != expy) begin
          failures++;
          if (failures < 10) $display("FAIL %s y[%0d] = %0d expected %0d", name, ai,
                                      $signed(d64[l*16 +: 16]), expy);
        end
      end
    end
    $display("%s: m=%0d n=%0d p=%0d nbr=%0d K=%0d passes=%0d non-zero x=%0d: %0d cycles (%0d MAC cycles), conflicts=%0d fifo_full=%0d starve=%0d",
             name, m, n, p, nbr, K, n_passes, nz, cyc, nz * K, n_conflicts, n_fifo_full, n_starve);
  endtask

  initial begin
    cfg = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run_workload("NMT-1", 2048, 1024, 8, 1000);
    run_workload("Alex-FC7", 4096, 4096, 10, 206);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
