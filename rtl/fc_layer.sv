// fc_layer: fully connected layer of N_OUT parallel IF neurons.
//
// Each neuron has its own weight BRAM of ceil(N_IN/4) words (four weights per
// word). All BRAMs of the layer share one read address, so one clock reads
// word a of every neuron, and one spike splitter, shared by all neurons,
// splits the matching 16-bit presynaptic spike-time word. A forward time
// step therefore takes ceil(N_IN/4) clocks: 16 for 64 inputs, 5 for 20, as
// in the paper. Output spike times go to a spike-time store.
//
// Pipeline (two stages): in the issue stage the controller presents `op`,
// `addr`, `now` and `step_end`; the BRAM read happens at that edge. In the
// data stage (next clock) the BRAM words are valid and the caller must
// present `pre_word`, the presynaptic times of inputs 4*addr_q..4*addr_q+3
// (unused lanes = 15). Because the caller takes `pre_word` in the data stage,
// a layer can issue its first word in the same clock in which the previous
// layer finishes its step, and still see that layer's newest spikes.
//
// Operations: OP_FWD integrates (Eq. 3-5). OP_UPD reads word a, applies the
// spike-time gated update of every neuron (weight_updater) and writes it back
// in the data stage. OP_READ only reads; `rdata` then carries the words for
// the backpropagation unit of the layer below or for host readback. The host
// loads weights through `ld_*` when the layer is idle; an update write wins.
module fc_layer
  import snn_pkg::*;
#(
  parameter int N_IN     = 64,
  parameter int N_OUT    = 20,
  parameter int VW       = 18,
  parameter int LR_SHIFT = 12,
  localparam int WORDS   = (N_IN + LANES - 1) / LANES,
  localparam int AW      = (WORDS > 1) ? $clog2(WORDS) : 1,
  localparam int NW      = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               clear,
  // issue stage
  input  layer_op_e          op,
  input  logic [AW-1:0]      addr,
  input  stime_t             now,
  input  logic               step_end,
  // data stage
  input  logic [SWORD_W-1:0] pre_word,
  input  weight_t            theta,
  input  delta_t             delta [N_OUT],
  input  logic [LR_BITS-1:0] lr,
  // host weight load
  input  logic               ld_we,
  input  logic [NW-1:0]      ld_sel,
  input  logic [AW-1:0]      ld_addr,
  input  logic [WORD_W-1:0]  ld_data,
  // results
  output layer_op_e          op_q,
  output logic [AW-1:0]      addr_q,
  output logic [WORD_W-1:0]  rdata   [N_OUT],
  output stime_t             spike_t [N_OUT],
  output logic [N_OUT-1:0]   fired,
  output logic signed [VW-1:0] v     [N_OUT]
);

  stime_t             now_q;
  logic               step_end_q;
  stime_t             pre_t [LANES];
  logic [LANES-1:0]   match;
  logic [N_OUT-1:0]   fire;
  logic [WORD_W-1:0]  upd   [N_OUT];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      op_q       <= OP_NOP;
      addr_q     <= '0;
      now_q      <= '0;
      step_end_q <= 1'b0;
    end else begin
      op_q       <= op;
      addr_q     <= addr;
      now_q      <= now;
      step_end_q <= step_end;
    end
  end

  spike_splitter u_split (
    .word  (pre_word),
    .now   (now_q),
    .valid (op_q == OP_FWD),
    .times (pre_t),
    .match (match)
  );

  weight_updater #(.N(N_OUT), .LR_SHIFT(LR_SHIFT)) u_upd (
    .rdata  (rdata),
    .pre_t  (pre_t),
    .post_t (spike_t),
    .delta  (delta),
    .lr     (lr),
    .wdata  (upd)
  );

  for (genvar n = 0; n < N_OUT; n++) begin : g_neuron
    logic              we;
    logic [AW-1:0]     waddr;
    logic [WORD_W-1:0] wdata;

    always_comb begin
      if (op_q == OP_UPD) begin
        we = 1'b1;  waddr = addr_q;  wdata = upd[n];
      end else begin
        we = ld_we && (ld_sel == NW'(n));  waddr = ld_addr;  wdata = ld_data;
      end
    end

    weight_bram #(.DEPTH(WORDS), .WIDTH(WORD_W)) u_bram (
      .clk   (clk),
      .raddr (addr),
      .rdata (rdata[n]),
      .we    (we),
      .waddr (waddr),
      .wdata (wdata)
    );

    if_neuron #(.VW(VW)) u_neuron (
      .clk      (clk),
      .rst_n    (rst_n),
      .clear    (clear),
      .acc      (op_q == OP_FWD),
      .step_end (step_end_q),
      .match    (match),
      .word     (rdata[n]),
      .theta    (theta),
      .fire     (fire[n]),
      .fired    (fired[n]),
      .v        (v[n])
    );
  end

  spike_time_store #(.N(N_OUT)) u_times (
    .clk   (clk),
    .rst_n (rst_n),
    .clear (clear),
    .we    (fire),
    .now   (now_q),
    .times (spike_t)
  );

endmodule
