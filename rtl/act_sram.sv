// act_sram: the activation SRAM, N_ACTMB banks of DEPTH x W bits.
//
// Activation number a (16-bit activations, LANES = W/16 per word) lives in
// bank (a/LANES) mod N_ACTMB, row a/(LANES*N_ACTMB), lane a mod LANES: the
// banks are word-interleaved, so a sequential scan of x visits the banks in
// turn and the activation selector picks the right bank each cycle. With the
// defaults the whole SRAM holds a 64K-entry 16-bit vector.
//
// Interface: one single-port bank per index b. en[b]=1,we[b]=1 writes the
// lanes of wdata[b] whose bit in wmask[b] is set; en[b]=1,we[b]=0 reads and
// rdata[b] is valid one cycle later and held until the next read of that bank.
// The bank count, width and depth are the paper's; the interleaving, lane
// write masks and single port are this design's choices.
module act_sram #(
  parameter int unsigned N_BANK = 8,
  parameter int unsigned W      = 64,
  parameter int unsigned DEPTH  = 2048,
  parameter int unsigned LANE_W = 16,
  localparam int unsigned LANES = W / LANE_W,
  localparam int unsigned AW    = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             en    [N_BANK],
  input  logic             we    [N_BANK],
  input  logic [AW-1:0]    addr  [N_BANK],
  input  logic [W-1:0]     wdata [N_BANK],
  input  logic [LANES-1:0] wmask [N_BANK],
  output logic [W-1:0]     rdata [N_BANK]
);
  for (genvar b = 0; b < N_BANK; b++) begin : g_bank
    logic [W-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (en[b]) begin
        if (we[b]) begin
          for (int l = 0; l < LANES; l++)
            if (wmask[b][l]) mem[addr[b]][l*LANE_W +: LANE_W] <= wdata[b][l*LANE_W +: LANE_W];
        end else begin
          rdata[b] <= mem[addr[b]];
        end
      end
    end
  end
endmodule
