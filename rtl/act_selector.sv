// act_selector: reads the input vector x out of the activation SRAM banks.
//
// After 'start' it walks the words holding x_0 .. x_{n-1}: word u (global
// word number in_base/LANES + u) is read from bank (word mod N_BANK), row
// (word div N_BANK), and the returned data of that bank is selected and handed
// on with the index of its first lane and a mask of the lanes that lie inside
// the vector. One word is requested per cycle as long as the consumer keeps
// up (valid/ready handshake; a read is only issued when the previous word has
// been accepted, so the bank's output register holds the word until then).
//
// Timing: read issued in cycle c, word offered (out_valid) from cycle c+1.
// 'done' rises once every word has been accepted. in_base must be a multiple
// of LANES. The paper gives this block's purpose (pick the right x_i out of
// several banks under main-controller control); the word-wide scan and
// handshake are this design's choices.
module act_selector
  import permdnn_pkg::*;
#(
  parameter int unsigned N_BANK = N_ACTMB,
  parameter int unsigned LANES  = ACT_LANES,
  parameter int unsigned W      = W_ACTM,
  parameter int unsigned DEPTH  = ACT_DEPTH,
  localparam int unsigned AW    = $clog2(DEPTH),
  localparam int unsigned BW    = $clog2(N_BANK),
  localparam int unsigned LW    = $clog2(LANES)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              start,
  input  logic [AIDX_W-1:0] in_base,
  input  logic [AIDX_W:0]   n_in,
  // SRAM read side
  output logic              rd_en   [N_BANK],
  output logic [AW-1:0]     rd_addr,
  input  logic [W-1:0]      rd_data [N_BANK],
  // word output
  output logic              out_valid,
  input  logic              out_ready,
  output logic [W-1:0]      out_word,
  output logic [AIDX_W-1:0] out_idx,    // x index of lane 0
  output logic [LANES-1:0]  out_lmask,  // lanes inside the vector
  output logic              done
);
  logic [AIDX_W:0]   nwords, u;
  logic              active, dvalid, issue;
  logic [AIDX_W-1:0] word_g;
  logic [BW-1:0]     bank_q;
  logic [AIDX_W-1:0] idx_q;

  assign nwords = (n_in + (AIDX_W+1)'(LANES - 1)) >> LW;
  assign word_g = (in_base >> LW) + AIDX_W'(u);
  assign issue  = active && (u < nwords) && (!dvalid || out_ready);
  assign rd_addr = AW'(word_g >> BW);

  always_comb
    for (int b = 0; b < N_BANK; b++) rd_en[b] = issue && (word_g[BW-1:0] == BW'(b));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active <= 1'b0; dvalid <= 1'b0; u <= '0; bank_q <= '0; idx_q <= '0;
    end else begin
      if (start) begin
        active <= 1'b1; u <= '0; dvalid <= 1'b0;
      end else begin
        if (issue) begin
          u      <= u + 1'b1;
          bank_q <= word_g[BW-1:0];
          idx_q  <= AIDX_W'(u << LW);
          dvalid <= 1'b1;
        end else if (out_ready) begin
          dvalid <= 1'b0;
        end
        if (active && u >= nwords && !dvalid) active <= 1'b0;
      end
    end
  end

  assign out_valid = dvalid;
  assign out_word  = rd_data[bank_q];
  assign out_idx   = idx_q;
  always_comb
    for (int l = 0; l < LANES; l++)
      out_lmask[l] = ((AIDX_W+1)'(idx_q) + (AIDX_W+1)'(l)) < n_in;
  assign done = !active && !start;
endmodule
