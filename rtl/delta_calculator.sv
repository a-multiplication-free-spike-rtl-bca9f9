// delta_calculator: temporal error of the output layer as Q1.9 deltas.
//
// From the output spike times t_j (15 = never fired), the class label and
// the margin gamma it forms the target times of the paper (Eq. 7):
//   t_min = min_j t_j
//   T_label = t_min - gamma
//   T_j     = t_min + gamma   for j != label with t_j < t_min + gamma
//   T_j     = t_j             otherwise
// and, if no output neuron fired (t_min = 15): T_label = 15 - gamma and
// T_j = 15 for the others. The delta is delta_j = (t_j - T_j) / 15, i.e.
// minus the paper's error e_j = (T_j - t_j)/tmax, so that adding
// lr*delta to a weight moves the neuron's spike toward its target. The
// division by tmax = 15 is a constant division; the result is saturated to
// the 10-bit Q1.9 range (|delta| < 1). The further 1/tmax factor of the
// paper's Eq. 11 is left to the learning rate. Combinational.
module delta_calculator
  import snn_pkg::*;
#(
  parameter int N  = 10,
  localparam int CW = (N > 1) ? $clog2(N) : 1
) (
  input  stime_t        times [N],
  input  logic [CW-1:0] label,
  input  stime_t        gamma,
  output delta_t        delta [N]
);

  logic signed [6:0] target [N];

  stime_t            tmin;
  logic              silent;
  logic signed [6:0] diff;
  logic signed [15:0] q;

  always_comb begin
    tmin = stime_t'(TMAX);
    for (int j = 0; j < N; j++)
      if (times[j] < tmin) tmin = times[j];
    silent = (tmin == stime_t'(TMAX));

    for (int j = 0; j < N; j++) begin
      if (silent)
        target[j] = (CW'(j) == label) ? 7'(TMAX) - 7'(gamma) : 7'(TMAX);
      else if (CW'(j) == label)
        target[j] = 7'(tmin) - 7'(gamma);
      else if (7'(times[j]) < 7'(tmin) + 7'(gamma))
        target[j] = 7'(tmin) + 7'(gamma);
      else
        target[j] = 7'(times[j]);

      diff = 7'(times[j]) - target[j];
      q    = (16'(diff) <<< 9) / 16'sd15;
      if (q > 16'sd511)       delta[j] = 10'sd511;
      else if (q < -16'sd511) delta[j] = -10'sd511;
      else                    delta[j] = delta_t'(q);
    end
  end

endmodule
