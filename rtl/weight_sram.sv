// weight_sram: the weight SRAM of one processing element, split into
// N_SUB sub-banks of SUB_DEPTH x SUB_W bits.
//
// Each row holds the N_MUL weight tags (4 bits each at the defaults) of one
// column of the block-permuted diagonal sub-matrices this PE owns, so one row
// read feeds every multiplier for one cycle (transposed layout). The flat row
// address is split into {sub-bank, row}: only the addressed sub-bank is
// enabled in a cycle, the other sub-banks stay idle to save energy.
//
// Interface: single port, synchronous. With en=1 and we=1 the row is written;
// with en=1 and we=0 it is read and rdata is valid in the next cycle and held
// until the next read. The sub-banked organisation and sizes follow the paper;
// the single read/write port is this design's choice.
module weight_sram #(
  parameter int unsigned N_SUB     = 16,
  parameter int unsigned SUB_W     = 32,
  parameter int unsigned SUB_DEPTH = 2048,
  localparam int unsigned SUB_AW   = $clog2(SUB_DEPTH),
  localparam int unsigned SEL_W    = (N_SUB > 1) ? $clog2(N_SUB) : 1,
  localparam int unsigned AW       = SUB_AW + ((N_SUB > 1) ? $clog2(N_SUB) : 0)
) (
  input  logic             clk,
  input  logic             en,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [SUB_W-1:0] wdata,
  output logic [SUB_W-1:0] rdata
);
  logic [SEL_W-1:0]  sel, sel_q;
  logic [SUB_AW-1:0] row;
  logic [SUB_W-1:0]  sub_rdata [N_SUB];

  assign row = addr[SUB_AW-1:0];
  if (N_SUB > 1) begin : g_sel
    assign sel = addr[AW-1:SUB_AW];
  end else begin : g_nosel
    assign sel = '0;
  end

  for (genvar s = 0; s < N_SUB; s++) begin : g_sub
    logic [SUB_W-1:0] mem [SUB_DEPTH];
    logic             sub_en;
    assign sub_en = en && (sel == SEL_W'(s));   // one sub-bank enabled
    always_ff @(posedge clk) begin
      if (sub_en) begin
        if (we) mem[row] <= wdata;
        else    sub_rdata[s] <= mem[row];
      end
    end
  end

  always_ff @(posedge clk)
    if (en && !we) sel_q <= sel;

  assign rdata = sub_rdata[sel_q];
endmodule
