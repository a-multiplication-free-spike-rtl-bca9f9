// output_layer: the classification layer, N_OUT IF neurons plus decision logic.
//
// A fully connected layer of N_OUT neurons, one per class (10 for the 8x8
// digits), over the N_IN spike times of the last hidden layer; with 20
// inputs a time step takes 5 clocks. The decision maker compares the output
// spike times and reports the earliest-firing neuron (or, if none fired, the
// one with the highest potential) as `cls`. The layer's weights are updated
// by the output weight updater inside the fc_layer (op OP_UPD). Ports are
// those of fc_layer (see there for the issue/data pipeline) plus `cls`.
module output_layer
  import snn_pkg::*;
#(
  parameter int N_IN     = 20,
  parameter int N_OUT    = 10,
  parameter int VW       = 18,
  parameter int LR_SHIFT = 12,
  localparam int WORDS   = (N_IN + LANES - 1) / LANES,
  localparam int AW      = (WORDS > 1) ? $clog2(WORDS) : 1,
  localparam int NW      = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  input  layer_op_e          op,
  input  logic [AW-1:0]      addr,
  input  stime_t             now,
  input  logic               step_end,
  input  logic [SWORD_W-1:0] pre_word,
  input  weight_t            theta,
  input  delta_t             delta [N_OUT],
  input  logic [LR_BITS-1:0] lr,
  input  logic               ld_we,
  input  logic [NW-1:0]      ld_sel,
  input  logic [AW-1:0]      ld_addr,
  input  logic [WORD_W-1:0]  ld_data,
  output layer_op_e          op_q,
  output logic [AW-1:0]      addr_q,
  output logic [WORD_W-1:0]  rdata   [N_OUT],
  output stime_t             spike_t [N_OUT],
  output logic [N_OUT-1:0]   fired,
  output logic signed [VW-1:0] v     [N_OUT],
  output logic [NW-1:0]      cls,
  output logic               any_fired
);

  fc_layer #(.N_IN(N_IN), .N_OUT(N_OUT), .VW(VW), .LR_SHIFT(LR_SHIFT)) u_fc (
    .clk, .rst_n, .clear, .op, .addr, .now, .step_end, .pre_word, .theta,
    .delta, .lr, .ld_we, .ld_sel, .ld_addr, .ld_data,
    .op_q, .addr_q, .rdata, .spike_t, .fired, .v
  );

  decision_maker #(.N(N_OUT), .VW(VW)) u_dec (
    .times     (spike_t),
    .fired     (fired),
    .v         (v),
    .cls       (cls),
    .any_fired (any_fired)
  );

endmodule
