// act_routing: activation routing network (group writing of y).
//
// After a pass, every PE holds pass_rows finished activations. The PEs are
// split into N_BANK groups of GS = N_PE/N_BANK consecutive PEs; in each cycle
// one PE of every group offers one word of LANES y values, so up to
// N_BANK*LANES values move per cycle. The network computes where each word
// belongs,
//     a    = out_base + r*stride + lo + 4w   (PE r, word w of the pass)
//     bank = (a/LANES) mod N_BANK,  row = a/(LANES*N_BANK),
// and switches it to that bank. Group g walks its PEs one after the other
// and, inside a PE, the words starting at word (g mod nw), so that groups
// whose PEs start on the same bank use different banks in the same cycle.
// If two groups still want the same bank, the lower group wins and the other
// retries in the next cycle ('conflicts' counts the losers).
//
// 'stride' is the per-PE spacing of y in the activation SRAM (nbr*p rounded up
// to a multiple of LANES); lanes past pass_rows are written as zero so the
// padding reads back as zero. Interface: pulse 'start' with lo/pass_rows
// stable; 'done' is high when idle. rd_row[r] tells PE r which pass row to put
// on its y_word port (combinational), and the bank write ports go to the
// activation SRAM. Group writing, one PE per bank group per cycle, is the
// paper's; the address map, word order and arbitration are this design's.
module act_routing
  import permdnn_pkg::*;
#(
  parameter int unsigned NPE    = N_PE,
  parameter int unsigned N_BANK = N_ACTMB,
  parameter int unsigned LANES  = ACT_LANES,
  parameter int unsigned DEPTH  = ACT_DEPTH,
  localparam int unsigned GS    = NPE / N_BANK,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned BW    = $clog2(N_BANK),
  localparam int unsigned LW    = $clog2(LANES),
  localparam int unsigned SW    = (GS > 1) ? $clog2(GS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [AIDX_W-1:0] out_base,
  input  logic [AIDX_W-1:0] stride,
  input  logic [AIDX_W-1:0] lo,
  input  logic [7:0]        pass_rows,
  // PE read side
  output logic [7:0]        rd_row [NPE],
  input  act_t              y_word [NPE][LANES],
  // SRAM write side
  output logic              wr_en   [N_BANK],
  output logic [AW-1:0]     wr_addr [N_BANK],
  output logic [LANES*Q-1:0] wr_data [N_BANK],
  output logic              done,
  output logic [BW:0]       conflicts
);
  logic [7:0]        nw;          // words per PE in this pass
  logic [SW:0]       s   [N_BANK]; // PE inside the group, GS = finished
  logic [7:0]        cnt [N_BANK]; // words of the current PE written
  logic [7:0]        w   [N_BANK]; // current word
  logic [7:0]        w0  [N_BANK]; // first word of every PE of group g
  logic              req [N_BANK];
  logic              gnt [N_BANK];
  logic [BW-1:0]     tb  [N_BANK];
  logic [AW-1:0]     trow[N_BANK];
  logic [LANES*Q-1:0] tdat[N_BANK];
  logic              busy;

  assign nw = (pass_rows + 8'(LANES - 1)) >> LW;

  // word start per group: g mod nw
  always_comb
    for (int g = 0; g < N_BANK; g++) begin
      logic [7:0] v;
      v = 8'(g);
      for (int k = 0; k < N_BANK; k++) if (nw != 0 && v >= nw) v = v - nw;
      w0[g] = v;
    end

  // requests: target bank/row and data of each group's current word
  always_comb begin
    for (int r = 0; r < NPE; r++) rd_row[r] = '0;
    for (int g = 0; g < N_BANK; g++) begin
      logic [AIDX_W-1:0] pe_i, a;
      pe_i = AIDX_W'(g * GS) + AIDX_W'(s[g]);
      a    = out_base + pe_i * stride + lo + AIDX_W'({w[g], {LW{1'b0}}});
      req[g]  = busy && (s[g] < (SW+1)'(GS));
      tb[g]   = a[LW +: BW];
      trow[g] = AW'(a >> (LW + BW));
      tdat[g] = '0;
      for (int k = 0; k < GS; k++)
        if (s[g] == (SW+1)'(k)) begin
          rd_row[g*GS + k] = {w[g][5:0], 2'b00};
          for (int l = 0; l < LANES; l++)
            if ((8'({w[g], {LW{1'b0}}}) + 8'(l)) < pass_rows)
              tdat[g][l*Q +: Q] = y_word[g*GS + k][l];
        end
    end
  end

  // fixed-priority crossbar: bank b takes the lowest group asking for it
  always_comb begin
    logic [BW:0] lost;
    lost = '0;
    for (int b = 0; b < N_BANK; b++) begin
      wr_en[b] = 1'b0; wr_addr[b] = '0; wr_data[b] = '0;
    end
    for (int g = 0; g < N_BANK; g++) begin
      gnt[g] = 1'b0;
      if (req[g]) begin
        if (!wr_en[tb[g]]) begin
          gnt[g] = 1'b1;
          wr_en[tb[g]]   = 1'b1;
          wr_addr[tb[g]] = trow[g];
          wr_data[tb[g]] = tdat[g];
        end else begin
          lost = lost + 1'b1;
        end
      end
    end
    conflicts = lost;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      for (int g = 0; g < N_BANK; g++) begin s[g] <= '0; cnt[g] <= '0; w[g] <= '0; end
    end else if (start) begin
      busy <= (pass_rows != 0);
      for (int g = 0; g < N_BANK; g++) begin s[g] <= '0; cnt[g] <= '0; w[g] <= w0[g]; end
    end else if (busy) begin
      logic all_done;
      all_done = 1'b1;
      for (int g = 0; g < N_BANK; g++) begin
        if (gnt[g]) begin
          if (cnt[g] == nw - 1'b1) begin
            s[g] <= s[g] + 1'b1; cnt[g] <= '0; w[g] <= w0[g];
            if (s[g] != (SW+1)'(GS - 1)) all_done = 1'b0;
          end else begin
            cnt[g] <= cnt[g] + 1'b1;
            w[g]   <= (w[g] == nw - 1'b1) ? '0 : w[g] + 1'b1;
            all_done = 1'b0;
          end
        end else if (s[g] < (SW+1)'(GS)) begin
          all_done = 1'b0;
        end
      end
      if (all_done) busy <= 1'b0;
    end
  end

  assign done = !busy && !start;
endmodule
