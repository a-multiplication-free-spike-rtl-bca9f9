// spike_grad_gen: turns output-layer deltas into signed backward spikes.
//
// The deltas are normalised by their total magnitude S = sum_j |delta_j| and
// mapped to a backward spike time (paper Eq. 12-14):
//   d_j   = round(15 * |delta_j| / S)       (0..15)
//   tau_j = 15 - d_j,  sign = sign(delta_j)
// so a larger gradient spikes earlier. d_j = 0 (or S = 0) means no spike,
// which is encoded as tau = 15. Positive deltas give STP spikes, negative
// ones STN spikes (neg = 1). No divider is used: d_j counts the k in 1..15
// for which 30*|delta_j| >= (2k-1)*S, which is the rounded quotient with
// halves rounding up; 30*|delta| is a shift-and-subtract and the (2k-1)*S
// are constant multiples (shift-and-add). Using the magnitude sum for the
// normalisation is this design's reading of the paper's delta/sum(delta).
// Combinational.
module spike_grad_gen
  import snn_pkg::*;
#(
  parameter int N = 10
) (
  input  delta_t  delta [N],
  output bspike_t bsp   [N]
);

  localparam int SW = D_BITS + $clog2(N) + 6;

  logic [SW-1:0] mag [N];
  logic [SW-1:0] s;
  logic [SW-1:0] x;
  logic [4:0]    d;

  always_comb begin
    s = '0;
    for (int j = 0; j < N; j++) begin
      mag[j] = (delta[j] < 0) ? SW'(-delta[j]) : SW'(delta[j]);
      s      = s + mag[j];
    end
    for (int j = 0; j < N; j++) begin
      x = (mag[j] << 5) - (mag[j] << 1);
      d = '0;
      if (s != '0)
        for (int k = 1; k <= TMAX; k++)
          if (x >= SW'(2*k - 1) * s) d = d + 5'd1;
      bsp[j].neg = delta[j] < 0;
      bsp[j].tau = stime_t'(TMAX - int'(d));
    end
  end

endmodule
