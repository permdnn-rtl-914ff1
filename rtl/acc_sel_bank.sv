// acc_sel_bank: one accumulation selector with its accumulator bank.
//
// Each multiplier of a PE owns one of these. The index calculator finds the
// row, inside the current p x p permuted diagonal block, that holds the
// non-zero entry of the column being processed:
//     row = (PermV + col) mod p,  computed as a b-bit add, a compare with p
//     and a conditional subtract of p (b = ceil(log2 p)).
// G comparators then pick the target accumulator: comparator r fires when
// r == slot*p + row, where slot says which of the floor(G/p) groups of p
// accumulators the current cycle uses (Case 1: slot = cycle within the
// column; Case 2: cycle within the pass). The matching accumulator adds the
// multiplier output; all others hold.
//
// Interface: 'valid' marks a product to add this cycle; 'clear' zeroes the
// bank (start of a pass) and wins over 'valid'. acc[] is visible at all times.
// Timing: the update is visible one cycle after valid.
// The structure (adder/subtractor/compare index calculator, comparator array,
// per-register adders) follows the paper's figure of the selector and bank.
// The figure prints the wrap test as ">p?"; this RTL wraps when sum >= p,
// which is what makes it a mod-p operation. Saturating addition is this
// design's choice.
module acc_sel_bank
  import permdnn_pkg::*;
#(
  parameter int unsigned G    = G_ACC,
  parameter int unsigned AW   = ACC_W,
  parameter int unsigned PVW  = PV_W,
  parameter int unsigned PW   = P_W,
  localparam int unsigned SW  = $clog2(G)
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 valid,
  input  logic [PVW-1:0]       permv,   // permutation value of this block
  input  logic [PW-1:0]        col,     // column index mod p
  input  logic [PW-1:0]        p,
  input  logic [SW-1:0]        slot,
  input  logic signed [AW-1:0] product, // multiplier output (scaled)
  output logic signed [AW-1:0] acc [G]
);
  localparam int unsigned BW = (PVW > PW) ? PVW + 1 : PW + 1;

  logic [BW-1:0] sum, row;
  logic [SW+PW:0] target;
  logic [G-1:0]   hit;

  // index calculator
  always_comb begin
    sum = BW'(permv) + BW'(col);
    row = (sum >= BW'(p)) ? sum - BW'(p) : sum;
    target = (SW+PW+1)'(slot) * (SW+PW+1)'(p) + (SW+PW+1)'(row);
  end

  // comparator array
  always_comb
    for (int r = 0; r < G; r++) hit[r] = valid && (target == (SW+PW+1)'(r));

  function automatic logic signed [AW-1:0] sat_add(input logic signed [AW-1:0] a,
                                                   input logic signed [AW-1:0] b);
    logic signed [AW:0] s;
    s = {a[AW-1], a} + {b[AW-1], b};
    if (s[AW] != s[AW-1]) return s[AW] ? {1'b1, {(AW-1){1'b0}}} : {1'b0, {(AW-1){1'b1}}};
    return s[AW-1:0];
  endfunction

  // accumulator bank
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int r = 0; r < G; r++) acc[r] <= '0;
    end else if (clear) begin
      for (int r = 0; r < G; r++) acc[r] <= '0;
    end else begin
      for (int r = 0; r < G; r++)
        if (hit[r]) acc[r] <= sat_add(acc[r], product);
    end
  end
endmodule
