// zero_detector: forwards only the non-zero activations of x.
//
// It takes one activation word (LANES values, with the x index of lane 0 and
// a mask of lanes inside the vector) and emits its non-zero lanes one per
// cycle, lowest lane first, as {value, index} entries for the activation
// FIFO. Zero lanes are dropped without costing a cycle; a word with no
// non-zero lane is consumed in one cycle. A new word is accepted in the same
// cycle as the last non-zero lane of the current one leaves, so a stream of
// dense words runs at one activation per cycle.
//
// Handshakes: in_valid/in_ready for words, out_valid/out_ready for entries.
// 'skipped' pulses with the number of zero lanes dropped from an accepted
// word. The zero-skipping itself is the paper's; the word-at-a-time
// organisation is this design's choice.
module zero_detector
  import permdnn_pkg::*;
#(
  parameter int unsigned LANES = ACT_LANES
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  output logic              in_ready,
  input  logic [LANES*Q-1:0] in_word,
  input  logic [AIDX_W-1:0] in_idx,
  input  logic [LANES-1:0]  in_lmask,
  output logic              out_valid,
  input  logic              out_ready,
  output xent_t             out_ent,
  output logic [$clog2(LANES+1)-1:0] skipped
);
  logic [LANES*Q-1:0] word_q;
  logic [AIDX_W-1:0]  idx_q;
  logic [LANES-1:0]   mask_q, mask_next, nz_in, first;
  logic [$clog2(LANES)-1:0] first_i;

  always_comb begin
    first = '0; first_i = '0;
    for (int l = LANES - 1; l >= 0; l--)
      if (mask_q[l]) begin first = '0; first[l] = 1'b1; first_i = $clog2(LANES)'(l); end
    out_valid = |mask_q;
    out_ent.val = act_t'(word_q[first_i*Q +: Q]);
    out_ent.idx = idx_q + AIDX_W'(first_i);
    mask_next = (out_valid && out_ready) ? (mask_q & ~first) : mask_q;
    in_ready  = (mask_next == '0);
    for (int l = 0; l < LANES; l++)
      nz_in[l] = in_lmask[l] && (in_word[l*Q +: Q] != '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      mask_q <= '0; word_q <= '0; idx_q <= '0; skipped <= '0;
    end else begin
      skipped <= '0;
      if (in_valid && in_ready) begin
        word_q <= in_word;
        idx_q  <= in_idx;
        mask_q <= nz_in;
        skipped <= $clog2(LANES+1)'($countones(in_lmask & ~nz_in));
      end else begin
        mask_q <= mask_next;
      end
    end
  end
endmodule
