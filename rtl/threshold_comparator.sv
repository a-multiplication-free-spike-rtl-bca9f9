// threshold_comparator: single-spike fire decision for both passes.
//
// Forward (bipolar = 0): fire when the membrane potential v >= theta and the
// neuron has not fired yet (paper Eq. 5). Backward (bipolar = 1): fire a
// positive spike when v > theta and a negative spike (neg = 1) when
// v < -theta, again only if not fired yet (paper Eq. 16). The same unit
// serves both passes, as in the paper's semi-shared architecture.
// Combinational; the caller registers the result.
module threshold_comparator
  import snn_pkg::*;
#(
  parameter int VW = 18
) (
  input  logic signed [VW-1:0] v,
  input  weight_t              theta,
  input  logic                 bipolar,
  input  logic                 fired,
  output logic                 fire,
  output logic                 neg
);

  logic signed [VW-1:0] th;
  assign th = VW'(theta);

  always_comb begin
    fire = 1'b0;
    neg  = 1'b0;
    if (!fired) begin
      if (!bipolar) begin
        fire = (v >= th);
      end else if (v > th) begin
        fire = 1'b1;
      end else if (v < -th) begin
        fire = 1'b1;
        neg  = 1'b1;
      end
    end
  end

endmodule
