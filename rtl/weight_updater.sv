// weight_updater: spike-time gated weight update of one word for N neurons.
//
// For every neuron n and every lane m of the word just read from its BRAM:
//     if pre_t[m] < post_t[n]:   W += (delta[n] * lr) >>> LR_SHIFT   (saturating)
// i.e. the weight moves only when the presynaptic spike preceded the
// postsynaptic one (Eq. 9 of the paper). delta is Q1.9 (10 bits), lr an
// unsigned 10-bit Q0.10 learning rate; their product is the one scalar
// multiplication per neuron that the paper allows, and the shift brings it to
// Q5.7 weight units. The same unit serves the output layer ("output weight
// updater") and the hidden layers (the update sub-module of the
// backpropagation and hidden weight updater). Combinational: the layer writes
// `wdata` back to the address it read, one word per clock.
// The Q0.10 learning-rate format and LR_SHIFT = 12 are this design's choice.
module weight_updater
  import snn_pkg::*;
#(
  parameter int N        = 10,
  parameter int LR_SHIFT = 12
) (
  input  logic [WORD_W-1:0]  rdata  [N],
  input  stime_t             pre_t  [LANES],
  input  stime_t             post_t [N],
  input  delta_t             delta  [N],
  input  logic [LR_BITS-1:0] lr,
  output logic [WORD_W-1:0]  wdata  [N]
);

  localparam int PW = D_BITS + LR_BITS + 1;

  logic signed [PW-1:0]       prod [N];
  logic signed [W_BITS+8:0]   dw   [N];

  always_comb begin
    for (int n = 0; n < N; n++) begin
      prod[n] = PW'(delta[n]) * $signed({1'b0, lr});
      dw[n]   = (W_BITS+9)'(prod[n] >>> LR_SHIFT);
      for (int m = 0; m < LANES; m++) begin
        if (pre_t[m] < post_t[n])
          wdata[n][m*W_BITS +: W_BITS] = sat_add(weight_t'(rdata[n][m*W_BITS +: W_BITS]), dw[n]);
        else
          wdata[n][m*W_BITS +: W_BITS] = rdata[n][m*W_BITS +: W_BITS];
      end
    end
  end

endmodule
