// pe: one processing element of the PermDNN engine.
//
// A PE owns nbr consecutive block rows (nbr*p rows of the weight matrix) and
// computes their part of a = W x column by column. For every non-zero x_j the
// main controller issues K = ceil(nbr/N_MUL) cycles; in cycle t multiplier m
// works on block row t*N_MUL + m. Because each column of a p x p permuted
// diagonal block has exactly one non-zero, one weight-SRAM row gives every
// multiplier exactly one weight and no index is stored: the row inside the
// block is recomputed from the block's permutation value as (PermV + j) mod p.
//
// Datapath (5-stage pipeline counting the controller's issue register):
//   weight SRAM (tags) -> weight LUT -> weight registers (Reg #1..#N_MUL)
//   -> N_MUL multipliers (x * w, product >>> FRAC) -> N_MUL accumulation
//   selectors, each with G = N_ACC/N_MUL accumulators.
// The permutation SRAM is read in the same cycle as the weight SRAM and its
// values travel alongside the weights. Each accumulator has an activation
// unit; the routing network reads the resulting y values four at a time.
//
// Output read port: rd_row is a row offset inside the current pass (a
// multiple of 4); y_word[l] is the activation of pass row rd_row+l, taken
// from bank (R mod N_MUL), register (R div N_MUL)*p + c, where
// R = (rd_row+l) div p and c = (rd_row+l) mod p. Combinational.
// Block structure, sizes and pipeline depth follow the paper; the product
// scaling, the number format and the read port are this design's choices.
module pe
  import permdnn_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  input  pe_cmd_t             cmd,
  input  logic [NBR_W-1:0]    nbr,
  input  logic [P_W-1:0]      p,
  input  act_fn_e             act_fn,
  // host load port
  input  logic                host_we,
  input  host_sel_e           host_sel,
  input  logic [WADDR_W-1:0]  host_addr,
  input  logic [W_ACTM-1:0]   host_wdata,
  // y read port
  input  logic [7:0]          rd_row,
  output act_t                y_word [ACT_LANES]
);
  logic                wsram_en, wsram_we, psram_en, psram_we;
  logic [WADDR_W-1:0]  wsram_addr;
  logic [PADDR_W-1:0]  psram_addr;
  logic                wreg_en, mul_valid, acc_clear;
  act_t                mul_x;
  logic [N_MUL-1:0]    acc_valid;
  logic [P_W-1:0]      acc_d;
  logic [SLOT_W-1:0]   acc_slot;

  pe_ctrl u_ctrl (
    .clk, .rst_n, .cmd, .nbr,
    .host_wsram_we (host_we && host_sel == HOST_WEIGHT),
    .host_psram_we (host_we && host_sel == HOST_PERM),
    .host_addr,
    .wsram_en, .wsram_we, .wsram_addr,
    .psram_en, .psram_we, .psram_addr,
    .wreg_en, .mul_valid, .mul_x,
    .acc_valid, .acc_clear, .acc_d, .acc_slot
  );

  // ---------------- memories ----------------
  logic [WSUB_W-1:0] wrow;
  logic [PV_W-1:0]   permv [N_MUL];

  weight_sram #(.N_SUB(N_WSUB), .SUB_W(WSUB_W), .SUB_DEPTH(WSUB_DEPTH)) u_wsram (
    .clk, .en(wsram_en), .we(wsram_we), .addr(wsram_addr),
    .wdata(host_wdata[WSUB_W-1:0]), .rdata(wrow)
  );

  perm_sram #(.N_MUL(N_MUL), .PERM_W(PERM_W), .PERM_DEPTH(PERM_DEPTH)) u_psram (
    .clk, .en(psram_en), .we(psram_we), .addr(psram_addr),
    .wdata(host_wdata[PERM_W-1:0]), .permv
  );

  // ---------------- weight LUT and weight registers ----------------
  logic [TAG_W-1:0] tags [N_MUL];
  act_t             wdec [N_MUL];
  act_t             wreg [N_MUL];
  logic [PV_W-1:0]  pv_s2 [N_MUL];
  logic [PV_W-1:0]  pv_s3 [N_MUL];

  always_comb
    for (int m = 0; m < N_MUL; m++) tags[m] = wrow[m*TAG_W +: TAG_W];

  weight_lut #(.N_MUL(N_MUL), .TAG_W(TAG_W), .Q(Q)) u_lut (
    .clk,
    .lut_we   (host_we && host_sel == HOST_LUT),
    .lut_addr (host_addr[TAG_W-1:0]),
    .lut_wdata(act_t'(host_wdata[Q-1:0])),
    .tags, .weights(wdec)
  );

  always_ff @(posedge clk) begin
    if (wreg_en)
      for (int m = 0; m < N_MUL; m++) begin
        wreg[m]  <= wdec[m];
        pv_s2[m] <= permv[m];
      end
  end

  // ---------------- multipliers ----------------
  acc_t prod [N_MUL];

  always_ff @(posedge clk) begin
    for (int m = 0; m < N_MUL; m++) begin
      logic signed [2*Q-1:0] full;
      full = mul_x * wreg[m];
      if (mul_valid) begin
        prod[m]  <= acc_t'(full >>> FRAC);
        pv_s3[m] <= pv_s2[m];
      end
    end
  end

  // ---------------- accumulation selectors and banks, ActUs ----------------
  acc_t acc [N_MUL][G_ACC];
  act_t y   [N_MUL][G_ACC];

  for (genvar m = 0; m < N_MUL; m++) begin : g_bank
    acc_sel_bank u_bank (
      .clk, .rst_n,
      .clear  (acc_clear),
      .valid  (acc_valid[m]),
      .permv  (pv_s3[m]),
      .col    (acc_d),
      .p,
      .slot   (acc_slot),
      .product(prod[m]),
      .acc    (acc[m])
    );
    for (genvar r = 0; r < G_ACC; r++) begin : g_actu
      act_unit u_actu (.fn(act_fn), .a(acc[m][r]), .y(y[m][r]));
    end
  end

  // ---------------- y read port ----------------
  always_comb begin
    for (int l = 0; l < ACT_LANES; l++) begin
      logic [AIDX_W-1:0] row, rb, c, reg_i;
      row = AIDX_W'(rd_row) + AIDX_W'(l);
      rb  = div_by_p(row, 7'(p));
      c   = row - rb * AIDX_W'(p);
      reg_i = AIDX_W'(rb / AIDX_W'(N_MUL)) * AIDX_W'(p) + c;
      y_word[l] = (reg_i < AIDX_W'(G_ACC)) ? y[rb[$clog2(N_MUL)-1:0]][reg_i[SLOT_W-1:0]] : '0;
    end
  end
endmodule
