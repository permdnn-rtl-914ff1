// act_fifo: activation FIFO between the zero detector and the PE array.
//
// A synchronous first-in first-out buffer of DEPTH entries of W bits. It
// builds up a backlog of non-zero activations while the PEs spend one or more
// cycles on each, so that the PEs find their next x_j waiting when they need
// it. push is ignored when full, pop when empty. dout shows the oldest entry
// (first-word fall-through); 'count' is the fill level.
// Timing: an entry pushed in cycle c can be popped from cycle c+1.
// Width 32 ({16-bit value, 16-bit index}) and depth 32 are the paper's;
// the fall-through organisation is this design's choice.
module act_fifo #(
  parameter int unsigned W     = 32,
  parameter int unsigned DEPTH = 32,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         push,
  input  logic [W-1:0] din,
  input  logic         pop,
  output logic [W-1:0] dout,
  output logic         full,
  output logic         empty,
  output logic [AW:0]  count
);
  logic [W-1:0]  mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic          do_push, do_pop;

  assign full    = (count == (AW+1)'(DEPTH));
  assign empty   = (count == '0);
  assign do_push = push && !full;
  assign do_pop  = pop && !empty;
  assign dout    = mem[rp];

  always_ff @(posedge clk) if (do_push) mem[wp] <= din;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; count <= '0;
    end else begin
      if (do_push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (do_pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(do_push) - (AW+1)'(do_pop);
    end
  end

  // a pop must never be requested on an empty FIFO by a correct controller
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) !(pop && empty));
endmodule
