// weight_lut: weight-sharing decoder of one processing element.
//
// The weight SRAM stores a TAG_W-bit virtual weight tag (cluster index) per
// non-zero weight. This table of 2^TAG_W signed Q-bit entries turns the N_MUL
// tags of one SRAM row into N_MUL actual weights. Decoding is combinational;
// the PE registers its output into the per-multiplier weight registers.
//
// Interface: lut_we/lut_addr/lut_wdata load one entry (host, while idle);
// tags[] in, weights[] out in the same cycle. Entries are not reset: they must
// be loaded before use. The table and its 4-bit/16-bit sizes follow the paper;
// the load port is this design's choice.
module weight_lut #(
  parameter int unsigned N_MUL = 8,
  parameter int unsigned TAG_W = 4,
  parameter int unsigned Q     = 16
) (
  input  logic                clk,
  input  logic                lut_we,
  input  logic [TAG_W-1:0]    lut_addr,
  input  logic signed [Q-1:0] lut_wdata,
  input  logic [TAG_W-1:0]    tags    [N_MUL],
  output logic signed [Q-1:0] weights [N_MUL]
);
  logic signed [Q-1:0] table_q [2**TAG_W];

  always_ff @(posedge clk)
    if (lut_we) table_q[lut_addr] <= lut_wdata;

  always_comb
    for (int m = 0; m < N_MUL; m++) weights[m] = table_q[tags[m]];
endmodule
