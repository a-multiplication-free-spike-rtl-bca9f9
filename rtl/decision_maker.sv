// decision_maker: picks the predicted class from the output layer.
//
// The class is the output neuron that fired earliest (arg min of the spike
// times). If no output neuron fired, the class is the neuron with the
// highest membrane potential, as the paper prescribes for the test phase.
// Ties go to the lowest index (this design's choice). Combinational; it only
// compares timestamps and potentials, no arithmetic.
module decision_maker
  import snn_pkg::*;
#(
  parameter int N  = 10,
  parameter int VW = 18,
  localparam int CW = (N > 1) ? $clog2(N) : 1
) (
  input  stime_t               times [N],
  input  logic [N-1:0]         fired,
  input  logic signed [VW-1:0] v     [N],
  output logic [CW-1:0]        cls,
  output logic                 any_fired
);

  stime_t               best_t;
  logic signed [VW-1:0] best_v;
  logic [CW-1:0]        by_t, by_v;

  always_comb begin
    best_t = stime_t'(TMAX);
    best_v = v[0];
    by_t   = '0;
    by_v   = '0;
    for (int n = 0; n < N; n++) begin
      if (fired[n] && (times[n] < best_t)) begin
        best_t = times[n];
        by_t   = CW'(n);
      end
      if (v[n] > best_v) begin
        best_v = v[n];
        by_v   = CW'(n);
      end
    end
    any_fired = |fired;
    cls       = any_fired ? by_t : by_v;
  end

endmodule
