// weight_select: weight splitter and weight selection.
//
// Splits a 48-bit weight word into four signed 12-bit weights and passes to
// the adder tree, per lane, the weight itself (en=1, neg=0), its two's
// complement (en=1, neg=1) or zero (en=0). The forward pass enables the lanes
// whose input spike occurs at the current step; the backward pass also uses
// `neg` for negative (STN) gradient spikes, as the paper handles them by
// two's complement of the weight. Negating the most negative weight
// saturates to the most positive one (this design's choice).
// Purely combinational.
module weight_select
  import snn_pkg::*;
(
  input  logic [WORD_W-1:0] word,
  input  logic [LANES-1:0]  en,
  input  logic [LANES-1:0]  neg,
  output weight_t           sel [LANES]
);

  weight_t w;

  always_comb begin
    for (int m = 0; m < LANES; m++) begin
      w = weight_t'(word[m*W_BITS +: W_BITS]);
      if (!en[m])             sel[m] = '0;
      else if (!neg[m])       sel[m] = w;
      else if (w == W_MIN)    sel[m] = W_MAX;
      else                    sel[m] = -w;
    end
  end

endmodule
