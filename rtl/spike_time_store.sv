// spike_time_store: forward spike times of one layer, kept for the backward pass.
//
// Each neuron's firing time is written here when it fires (we[n] = 1 stores
// `now` for neuron n; any number of neurons may fire in the same clock). At
// the start of a sample `clear` sets every entry to 15, the virtual spike
// time of a neuron that never fires. The stored times feed the next layer
// (Universal Time Coding: 4-bit timestamps between layers), the decision
// maker and the weight updates of the training phase. The paper keeps these
// times in per-neuron BRAMs; a register file is used here because all
// neurons of a layer may fire in the same clock.
module spike_time_store
  import snn_pkg::*;
#(
  parameter int N = 20
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         clear,
  input  logic [N-1:0] we,
  input  stime_t       now,
  output stime_t       times [N]
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int n = 0; n < N; n++) times[n] <= stime_t'(TMAX);
    end else if (clear) begin
      for (int n = 0; n < N; n++) times[n] <= stime_t'(TMAX);
    end else begin
      for (int n = 0; n < N; n++) if (we[n]) times[n] <= now;
    end
  end

endmodule
