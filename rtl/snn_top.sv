// snn_top: on-chip trainable 64-20-20-10 spiking network with spike-time learning.
//
// The network classifies 8x8 images whose 64 pixels arrive as 4-bit
// latency-coded spike times (bright pixel = early spike). Two hidden layers of
// 20 and an output layer of 10 non-leaky integrate-and-fire neurons each fire
// at most once; the earliest output spike is the class. Training needs no
// gradient memory and only one multiplication per neuron (delta x learning
// rate): output errors become signed backward spikes whose timing encodes the
// gradient magnitude, and hidden layers integrate them with the same kind of
// IF neuron to form their own backward spikes.
//
// Blocks: input_spike_mem (memory-mapped input sample), three fc_layer's
// (the last wrapped in output_layer with the decision maker), each neuron
// with its own weight BRAM; delta_calculator and spike_grad_gen for the
// output error; the output-layer and hidden-layer weight updates inside the
// layers (weight_updater); two bp_unit's (backward neurons of hidden 2 and
// hidden 1), which read their weights from the layer above's BRAMs; and
// snn_controller with the shared digital timer.
//
// Host interface (all synchronous to clk):
//   in_we/in_addr/in_data  write the input spike word in_addr (4 times)
//   ld_we/ld_layer/ld_sel/ld_addr/ld_data  write weight word ld_addr of
//       neuron ld_sel of layer ld_layer (0 = hidden 1, 1 = hidden 2, 2 = out)
//   rb_en/rb_layer/rb_sel/rb_addr  read a weight word; rb_data next clock
//   start (+ train, label)  run one sample; busy until the done pulse
// Loads and readback are allowed only while busy is low (checked by
// assertions). Thresholds, gamma and the learning rate are inputs that must
// stay stable while busy. After done, cls/any_fired hold the decision and
// out_t/h1_t/h2_t the forward spike times; bsp_o holds the output layer's
// backward spikes of the last training step.
//
// Timing with the default sizes: forward 15 x 26 + 1 clocks, then 1 clock to
// decide (inference done 2 clocks later); training adds 2 + 5 + 1 + 75 + 5 +
// 1 + 75 + 16 + 1 clocks.
module snn_top
  import snn_pkg::*;
#(
  parameter int N_IN     = 64,
  parameter int N_H1     = 20,
  parameter int N_H2     = 20,
  parameter int N_OUT    = 10,
  parameter int T_STEPS  = TMAX,
  parameter int VW       = 18,
  parameter int LR_SHIFT = 12,
  localparam int G1  = (N_IN + LANES - 1) / LANES,
  localparam int G2  = (N_H1 + LANES - 1) / LANES,
  localparam int G3  = (N_H2 + LANES - 1) / LANES,
  localparam int AW  = $clog2(G1 + 1),
  localparam int A1  = (G1 > 1) ? $clog2(G1) : 1,
  localparam int A2  = (G2 > 1) ? $clog2(G2) : 1,
  localparam int A3  = (G3 > 1) ? $clog2(G3) : 1,
  localparam int NMX = (N_H1 > N_H2) ? ((N_H1 > N_OUT) ? N_H1 : N_OUT) : ((N_H2 > N_OUT) ? N_H2 : N_OUT),
  localparam int SW  = (NMX > 1) ? $clog2(NMX) : 1,
  localparam int CW  = (N_OUT > 1) ? $clog2(N_OUT) : 1
) (
  input  logic               clk,
  input  logic               rst_n,
  // run control
  input  logic               start,
  input  logic               train,
  input  logic [CW-1:0]      label,
  input  stime_t             gamma,
  input  logic [LR_BITS-1:0] lr,
  input  weight_t            theta_h1,
  input  weight_t            theta_h2,
  input  weight_t            theta_o,
  input  weight_t            theta_b,
  output logic               busy,
  output logic               done,
  // input spike memory
  input  logic               in_we,
  input  logic [A1-1:0]      in_addr,
  input  logic [SWORD_W-1:0] in_data,
  // weight load and readback
  input  logic               ld_we,
  input  logic [1:0]         ld_layer,
  input  logic [SW-1:0]      ld_sel,
  input  logic [AW-1:0]      ld_addr,
  input  logic [WORD_W-1:0]  ld_data,
  input  logic               rb_en,
  input  logic [1:0]         rb_layer,
  input  logic [SW-1:0]      rb_sel,
  input  logic [AW-1:0]      rb_addr,
  output logic [WORD_W-1:0]  rb_data,
  // results
  output logic [CW-1:0]      cls,
  output logic               any_fired,
  output stime_t             out_t [N_OUT],
  output stime_t             h1_t  [N_H1],
  output stime_t             h2_t  [N_H2],
  output bspike_t            bsp_o [N_OUT]
);

  layer_op_e     op [3];
  logic [AW-1:0] addr;
  stime_t        now, bp_now;
  logic          step_end, clear_fwd, clear_bp2, clear_bp1;
  logic          dec_en, delta_en, sgg_en, bp2_acc, bp1_acc;
  logic [AW-1:0] bp_grp;

  snn_controller #(.G1(G1), .G2(G2), .G3(G3), .T_STEPS(T_STEPS)) u_ctrl (
    .clk, .rst_n, .start, .train, .rb_en, .rb_layer, .rb_addr,
    .op, .addr, .now, .step_end, .clear_fwd, .clear_bp2, .clear_bp1,
    .dec_en, .delta_en, .sgg_en, .bp2_acc, .bp1_acc, .bp_grp, .bp_now,
    .busy, .done
  );

  // ---------------- forward layers ----------------
  logic [SWORD_W-1:0] pre1, pre2, pre3;
  layer_op_e          op1_q, op2_q, op3_q;
  logic [A1-1:0]      a1_q;
  logic [A2-1:0]      a2_q;
  logic [A3-1:0]      a3_q;
  logic [WORD_W-1:0]  rd1 [N_H1];
  logic [WORD_W-1:0]  rd2 [N_H2];
  logic [WORD_W-1:0]  rd3 [N_OUT];
  logic [N_H1-1:0]    f1;
  logic [N_H2-1:0]    f2;
  logic [N_OUT-1:0]   f3;
  logic signed [VW-1:0] v1 [N_H1];
  logic signed [VW-1:0] v2 [N_H2];
  logic signed [VW-1:0] v3 [N_OUT];
  delta_t             d1 [N_H1];
  delta_t             d2 [N_H2];
  delta_t             d_oq [N_OUT];
  logic [CW-1:0]      cls_c;
  logic               any_c;

  input_spike_mem #(.N_IN(N_IN)) u_in (
    .clk, .we(in_we), .waddr(in_addr), .wdata(in_data),
    .raddr(A1'(addr)), .rdata(pre1)
  );

  // presynaptic spike-time words of the hidden layers (data stage)
  always_comb begin
    for (int m = 0; m < LANES; m++) begin
      pre2[m*T_BITS +: T_BITS] = (int'(a2_q)*LANES + m < N_H1) ? h1_t[int'(a2_q)*LANES + m] : stime_t'(TMAX);
      pre3[m*T_BITS +: T_BITS] = (int'(a3_q)*LANES + m < N_H2) ? h2_t[int'(a3_q)*LANES + m] : stime_t'(TMAX);
    end
  end

  fc_layer #(.N_IN(N_IN), .N_OUT(N_H1), .VW(VW), .LR_SHIFT(LR_SHIFT)) u_h1 (
    .clk, .rst_n, .clear(clear_fwd), .op(op[0]), .addr(A1'(addr)), .now, .step_end,
    .pre_word(pre1), .theta(theta_h1), .delta(d1), .lr,
    .ld_we(ld_we && ld_layer == 2'd0), .ld_sel(ld_sel), .ld_addr(A1'(ld_addr)), .ld_data,
    .op_q(op1_q), .addr_q(a1_q), .rdata(rd1), .spike_t(h1_t), .fired(f1), .v(v1)
  );

  fc_layer #(.N_IN(N_H1), .N_OUT(N_H2), .VW(VW), .LR_SHIFT(LR_SHIFT)) u_h2 (
    .clk, .rst_n, .clear(clear_fwd), .op(op[1]), .addr(A2'(addr)), .now, .step_end,
    .pre_word(pre2), .theta(theta_h2), .delta(d2), .lr,
    .ld_we(ld_we && ld_layer == 2'd1), .ld_sel(ld_sel), .ld_addr(A2'(ld_addr)), .ld_data,
    .op_q(op2_q), .addr_q(a2_q), .rdata(rd2), .spike_t(h2_t), .fired(f2), .v(v2)
  );

  output_layer #(.N_IN(N_H2), .N_OUT(N_OUT), .VW(VW), .LR_SHIFT(LR_SHIFT)) u_out (
    .clk, .rst_n, .clear(clear_fwd), .op(op[2]), .addr(A3'(addr)), .now, .step_end,
    .pre_word(pre3), .theta(theta_o), .delta(d_oq), .lr,
    .ld_we(ld_we && ld_layer == 2'd2), .ld_sel(CW'(ld_sel)), .ld_addr(A3'(ld_addr)), .ld_data,
    .op_q(op3_q), .addr_q(a3_q), .rdata(rd3), .spike_t(out_t), .fired(f3), .v(v3),
    .cls(cls_c), .any_fired(any_c)
  );

  // ---------------- output error and backward spikes ----------------
  delta_t  d_c   [N_OUT];
  bspike_t bsp_c [N_OUT];

  delta_calculator #(.N(N_OUT)) u_dc (
    .times(out_t), .label, .gamma, .delta(d_c)
  );

  spike_grad_gen #(.N(N_OUT)) u_sgg (.delta(d_oq), .bsp(bsp_c));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cls       <= '0;
      any_fired <= 1'b0;
      for (int j = 0; j < N_OUT; j++) begin
        d_oq[j]      <= '0;
        bsp_o[j].neg <= 1'b0;
        bsp_o[j].tau <= stime_t'(TMAX);
      end
    end else begin
      if (dec_en) begin
        cls       <= cls_c;
        any_fired <= any_c;
      end
      if (delta_en) d_oq  <= d_c;
      if (sgg_en)   bsp_o <= bsp_c;
    end
  end

  // ---------------- backpropagation to the hidden layers ----------------
  bspike_t bsp2 [N_H2];
  bspike_t bsp1 [N_H1];

  bp_unit #(.N(N_H2), .K(N_OUT), .VW(VW)) u_bp2 (
    .clk, .rst_n, .clear(clear_bp2), .acc(bp2_acc), .grp(A3'(bp_grp)), .now(bp_now),
    .up_word(rd3), .up_bsp(bsp_o), .up_t(out_t), .own_t(h2_t), .theta_b,
    .bsp(bsp2), .delta(d2)
  );

  bp_unit #(.N(N_H1), .K(N_H2), .VW(VW)) u_bp1 (
    .clk, .rst_n, .clear(clear_bp1), .acc(bp1_acc), .grp(A2'(bp_grp)), .now(bp_now),
    .up_word(rd2), .up_bsp(bsp2), .up_t(h2_t), .own_t(h1_t), .theta_b,
    .bsp(bsp1), .delta(d1)
  );

  // ---------------- host readback ----------------
  logic [1:0]    rb_layer_q;
  logic [SW-1:0] rb_sel_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rb_layer_q <= '0;
      rb_sel_q   <= '0;
    end else begin
      rb_layer_q <= rb_layer;
      rb_sel_q   <= rb_sel;
    end
  end

  always_comb begin
    unique case (rb_layer_q)
      2'd0:    rb_data = (int'(rb_sel_q) < N_H1)  ? rd1[rb_sel_q] : '0;
      2'd1:    rb_data = (int'(rb_sel_q) < N_H2)  ? rd2[rb_sel_q] : '0;
      2'd2:    rb_data = (int'(rb_sel_q) < N_OUT) ? rd3[CW'(rb_sel_q)] : '0;
      default: rb_data = '0;
    endcase
  end

  // Host accesses are only legal while the sequencer is idle.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
    end else begin
      a_no_load_busy: assert (!(busy && (ld_we || in_we)))
        else $error("weight or input load while busy");
      a_no_start_busy: assert (!(busy && start))
        else $error("start while busy");
    end
  end

endmodule
