// if_neuron: non-leaky integrate-and-fire neuron with a 4-lane adder datapath.
//
// The neuron integrates one 48-bit weight word per clock. The weight
// selection passes the weights of the lanes whose presynaptic spike occurs at
// the current time step (`match`, from the layer's spike splitter), the
// 4-input adder tree sums them and the sum is added to the membrane
// potential V (Eq. 3 of the paper, without leak). A time step spans several
// words (N_IN/4 clocks); on the last word of a step (`step_end`) the
// threshold comparator checks V against theta and the neuron fires at most
// once per sample (Eq. 5). `clear` starts a sample: V = 0, not fired.
//
// Timing: inputs belong to the data stage of the layer pipeline; `fire` is
// combinational in the cycle of the last word, `fired` and V update at that
// clock edge. Comparing once per step, after all inputs of the step, is this
// design's reading of the per-step equations; the datapath is the paper's
// (splitter, selection, adder tree, comparator).
module if_neuron
  import snn_pkg::*;
#(
  parameter int VW = 18
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              acc,
  input  logic              step_end,
  input  logic [LANES-1:0]  match,
  input  logic [WORD_W-1:0] word,
  input  weight_t           theta,
  output logic              fire,
  output logic              fired,
  output logic signed [VW-1:0] v
);

  weight_t                   sel [LANES];
  logic signed [W_BITS+1:0]  sum;
  logic signed [VW-1:0]      v_next;
  logic                      cmp_fire, cmp_neg;

  weight_select u_sel (
    .word (word),
    .en   (match & {LANES{acc}}),
    .neg  ('0),
    .sel  (sel)
  );

  adder_tree #(.N(LANES), .IW(W_BITS), .OW(W_BITS + 2)) u_tree (
    .in  (sel),
    .sum (sum)
  );

  assign v_next = v + VW'(sum);

  threshold_comparator #(.VW(VW)) u_cmp (
    .v       (v_next),
    .theta   (theta),
    .bipolar (1'b0),
    .fired   (fired),
    .fire    (cmp_fire),
    .neg     (cmp_neg)
  );

  assign fire = acc && step_end && cmp_fire;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v     <= '0;
      fired <= 1'b0;
    end else if (clear) begin
      v     <= '0;
      fired <= 1'b0;
    end else if (acc) begin
      v <= v_next;
      if (fire) fired <= 1'b1;
    end
  end

endmodule
