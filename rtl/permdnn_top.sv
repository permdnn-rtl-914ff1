// permdnn_top: the PermDNN computing engine for fully-connected layers.
//
// The engine computes y = act(W x) for a weight matrix W made of p x p
// permuted diagonal blocks (each block has one non-zero per row and column,
// at row (PermV + column) mod p). It consists of
//   * N_PE processing elements, PE r owning block rows r*nbr .. r*nbr+nbr-1;
//   * the activation SRAM (N_ACTMB word-interleaved banks) holding x and y;
//   * the read path: activation selector -> zero detector -> activation FIFO,
//     which broadcasts only the non-zero x_j (with j) to all PEs;
//   * the activation routing network, which group-writes the PEs' y values
//     back into the activation SRAM after each pass;
//   * the main controller, which sequences passes and columns.
// y of PE r, row i, is stored at activation index out_base + r*stride + i,
// stride = nbr*p rounded up to a multiple of 4 (padding written as zero).
//
// Host port (this design's own; the paper does not describe one): while the
// engine is idle, host_we writes one row of the weight SRAM, permutation SRAM
// or weight LUT of PE host_pe, or one 64-bit word of the activation SRAM at
// global word address host_addr (bank = addr mod N_ACTMB). host_re reads an
// activation word; host_rdata is valid one cycle later. Pulse 'start' with
// cfg stable until 'done'. The counters report non-zero columns issued,
// passes, PE starvation cycles, zeros skipped, routing bank conflicts and
// cycles the FIFO was full.
module permdnn_top
  import permdnn_pkg::*;
#(
  parameter int unsigned NPE = N_PE
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  layer_cfg_t         cfg,
  output logic               busy,
  output logic               done,
  // host load/read port
  input  logic               host_we,
  input  logic               host_re,
  input  host_sel_e          host_sel,
  input  logic [$clog2(NPE)-1:0] host_pe,
  input  logic [AIDX_W-1:0]  host_addr,
  input  logic [W_ACTM-1:0]  host_wdata,
  output logic [W_ACTM-1:0]  host_rdata,
  // statistics
  output logic [31:0]        n_cols,
  output logic [31:0]        n_passes,
  output logic [31:0]        n_starve,
  output logic [31:0]        n_zero_skipped,
  output logic [31:0]        n_conflicts,
  output logic [31:0]        n_fifo_full
);
  localparam int unsigned AW = $clog2(ACT_DEPTH);
  localparam int unsigned BW = $clog2(N_ACTMB);

  // ---------------- main controller ----------------
  pe_cmd_t           cmd;
  logic              rd_start, rd_done, sel_done;
  logic              fifo_empty, fifo_full, fifo_pop;
  logic [FIFO_W-1:0] fifo_dout;
  logic              rt_start, rt_done;
  logic [AIDX_W-1:0] rt_lo, stride;
  logic [7:0]        rt_rows;
  logic              zd_out_valid;

  assign rd_done = sel_done && !zd_out_valid;

  main_ctrl u_ctrl (
    .clk, .rst_n, .start, .cfg, .busy, .done,
    .rd_start, .rd_done,
    .fifo_empty, .fifo_head(xent_t'(fifo_dout)), .fifo_pop,
    .cmd,
    .rt_start, .rt_lo, .rt_rows, .stride, .rt_done,
    .n_cols, .n_passes, .n_starve
  );

  // ---------------- activation SRAM and its port arbitration ----------------
  logic              a_en [N_ACTMB], a_we [N_ACTMB];
  logic [AW-1:0]     a_addr [N_ACTMB];
  logic [W_ACTM-1:0] a_wdata [N_ACTMB], a_rdata [N_ACTMB];
  logic [ACT_LANES-1:0] a_wmask [N_ACTMB];
  logic              sel_rd_en [N_ACTMB];
  logic [AW-1:0]     sel_rd_addr;
  logic              rt_wr_en [N_ACTMB];
  logic [AW-1:0]     rt_wr_addr [N_ACTMB];
  logic [W_ACTM-1:0] rt_wr_data [N_ACTMB];
  logic [BW-1:0]     host_bank, host_bank_q;

  assign host_bank = host_addr[BW-1:0];

  always_comb
    for (int b = 0; b < N_ACTMB; b++) begin
      a_wmask[b] = '1;
      if (rt_wr_en[b]) begin
        a_en[b] = 1'b1; a_we[b] = 1'b1; a_addr[b] = rt_wr_addr[b]; a_wdata[b] = rt_wr_data[b];
      end else if (sel_rd_en[b]) begin
        a_en[b] = 1'b1; a_we[b] = 1'b0; a_addr[b] = sel_rd_addr; a_wdata[b] = '0;
      end else begin
        a_en[b]    = !busy && (host_bank == BW'(b)) &&
                     (host_re || (host_we && host_sel == HOST_ACT));
        a_we[b]    = !host_re;
        a_addr[b]  = AW'(host_addr >> BW);
        a_wdata[b] = host_wdata;
      end
    end

  act_sram #(.N_BANK(N_ACTMB), .W(W_ACTM), .DEPTH(ACT_DEPTH), .LANE_W(Q)) u_act_sram (
    .clk, .en(a_en), .we(a_we), .addr(a_addr), .wdata(a_wdata), .wmask(a_wmask), .rdata(a_rdata)
  );

  always_ff @(posedge clk) if (host_re) host_bank_q <= host_bank;
  assign host_rdata = a_rdata[host_bank_q];

  // ---------------- read path: selector -> zero detector -> FIFO ----------------
  logic                  sw_valid, sw_ready;
  logic [W_ACTM-1:0]     sw_word;
  logic [AIDX_W-1:0]     sw_idx;
  logic [ACT_LANES-1:0]  sw_lmask;
  xent_t                 zd_ent;
  logic [$clog2(ACT_LANES+1)-1:0] zd_skipped;

  act_selector u_sel (
    .clk, .rst_n, .start(rd_start), .in_base(cfg.in_base), .n_in(cfg.n_in),
    .rd_en(sel_rd_en), .rd_addr(sel_rd_addr), .rd_data(a_rdata),
    .out_valid(sw_valid), .out_ready(sw_ready), .out_word(sw_word),
    .out_idx(sw_idx), .out_lmask(sw_lmask), .done(sel_done)
  );

  zero_detector u_zd (
    .clk, .rst_n,
    .in_valid(sw_valid), .in_ready(sw_ready), .in_word(sw_word),
    .in_idx(sw_idx), .in_lmask(sw_lmask),
    .out_valid(zd_out_valid), .out_ready(!fifo_full), .out_ent(zd_ent),
    .skipped(zd_skipped)
  );

  act_fifo #(.W(FIFO_W), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n, .push(zd_out_valid), .din(zd_ent), .pop(fifo_pop),
    .dout(fifo_dout), .full(fifo_full), .empty(fifo_empty), .count()
  );

  // ---------------- PE array ----------------
  logic [7:0] pe_rd_row [NPE];
  act_t       pe_y [NPE][ACT_LANES];

  for (genvar r = 0; r < NPE; r++) begin : g_pe
    pe u_pe (
      .clk, .rst_n, .cmd, .nbr(cfg.nbr), .p(cfg.p), .act_fn(cfg.act_fn),
      .host_we   (!busy && host_we && host_pe == $clog2(NPE)'(r) && host_sel != HOST_ACT),
      .host_sel, .host_addr(host_addr[WADDR_W-1:0]), .host_wdata,
      .rd_row(pe_rd_row[r]), .y_word(pe_y[r])
    );
  end

  // ---------------- activation routing network ----------------
  logic [BW:0] rt_conf;

  act_routing #(.NPE(NPE), .N_BANK(N_ACTMB), .LANES(ACT_LANES), .DEPTH(ACT_DEPTH)) u_rt (
    .clk, .rst_n, .start(rt_start), .out_base(cfg.out_base), .stride,
    .lo(rt_lo), .pass_rows(rt_rows),
    .rd_row(pe_rd_row), .y_word(pe_y),
    .wr_en(rt_wr_en), .wr_addr(rt_wr_addr), .wr_data(rt_wr_data),
    .done(rt_done), .conflicts(rt_conf)
  );

  // ---------------- statistics ----------------
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_zero_skipped <= '0; n_conflicts <= '0; n_fifo_full <= '0;
    end else if (start && !busy) begin
      n_zero_skipped <= '0; n_conflicts <= '0; n_fifo_full <= '0;
    end else begin
      n_zero_skipped <= n_zero_skipped + 32'(zd_skipped);
      n_conflicts    <= n_conflicts + 32'(rt_conf);
      if (zd_out_valid && fifo_full) n_fifo_full <= n_fifo_full + 1;
    end
  end
endmodule
