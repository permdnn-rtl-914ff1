// perm_sram: the permutation SRAM of one processing element.
//
// A single bank (not partitioned, unlike the weight and activation SRAMs) of
// PERM_DEPTH rows x PERM_W bits. Each row packs one permutation value (PermV)
// per accumulation selector: field m, bits [m*PV_W +: PV_W], goes to the
// selector of multiplier m. With the default 48-bit row and 8 multipliers a
// PermV field is 6 bits wide (p up to 64 representable).
//
// Interface: single port, synchronous; en=1,we=1 writes a row, en=1,we=0 reads
// it and permv[] is valid one cycle later and held until the next read.
// Sizes and field packing per multiplier follow the paper; the field order
// (multiplier 0 in the low bits) is this design's choice.
module perm_sram #(
  parameter int unsigned N_MUL      = 8,
  parameter int unsigned PERM_W     = 48,
  parameter int unsigned PERM_DEPTH = 2048,
  localparam int unsigned PV_W      = PERM_W / N_MUL,
  localparam int unsigned AW        = $clog2(PERM_DEPTH)
) (
  input  logic              clk,
  input  logic              en,
  input  logic              we,
  input  logic [AW-1:0]     addr,
  input  logic [PERM_W-1:0] wdata,
  output logic [PV_W-1:0]   permv [N_MUL]
);
  logic [PERM_W-1:0] mem [PERM_DEPTH];
  logic [PERM_W-1:0] rdata;

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

  always_comb
    for (int m = 0; m < N_MUL; m++) permv[m] = rdata[m*PV_W +: PV_W];
endmodule
