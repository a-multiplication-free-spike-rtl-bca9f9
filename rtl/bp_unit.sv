// bp_unit: backward IF neurons of one hidden layer (spike-time backpropagation).
//
// Gradients travel backward as signed spikes: the upstream layer (K neurons,
// the layer above) emits at most one spike each, at backward time tau, with
// sign +1 (STP) or -1 (STN). Each of the N hidden neurons here integrates a
// backward potential (paper Eq. 15)
//     Delta_i += sum_k S_k(tau) * W_ki * [t_i < t_k]
// where t are the forward spike times, and fires a single backward spike the
// first time Delta_i > theta_b (+1) or Delta_i < -theta_b (-1) (Eq. 16).
// Earlier backward spikes therefore stand for larger gradients. The neuron's
// delta for its own weight update is then sign * (15 - tau) / 16 in Q1.9
// (a 5-bit shift); a neuron that never fires has delta 0 and tau 15.
//
// Weights are not copied: W_ki lives in upstream neuron k's forward BRAM,
// word i/4, lane i%4. The controller reads word a of all K upstream BRAMs in
// one clock; that serves hidden neurons 4a..4a+3 at once. Per upstream
// neuron a weight_select gates and signs the four lanes (two's complement
// for STN spikes), and per hidden neuron of the group a K-input adder tree
// sums the terms. One backward step thus takes ceil(N/4) clocks (5 for 20
// neurons). Inputs belong to the data stage (the clock after the read);
// `clear` starts a new backward pass. Gating with forward times and deriving
// the delta from the backward spike time are this design's reading of the
// paper; see the module list in the documentation.
module bp_unit
  import snn_pkg::*;
#(
  parameter int N  = 20,
  parameter int K  = 10,
  parameter int VW = 18,
  localparam int GROUPS = (N + LANES - 1) / LANES,
  localparam int GW     = (GROUPS > 1) ? $clog2(GROUPS) : 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              acc,
  input  logic [GW-1:0]     grp,
  input  stime_t            now,
  input  logic [WORD_W-1:0] up_word [K],
  input  bspike_t           up_bsp  [K],
  input  stime_t            up_t    [K],
  input  stime_t            own_t   [N],
  input  weight_t           theta_b,
  output bspike_t           bsp     [N],
  output delta_t            delta   [N]
);

  localparam int TW = W_BITS + ((K > 1) ? $clog2(K) : 1);

  weight_t               sel   [K][LANES];
  weight_t               col   [LANES][K];
  logic signed [TW-1:0]  sum   [LANES];
  logic signed [VW-1:0]  pot   [N];
  logic [N-1:0]          bfired;
  logic signed [VW-1:0]  pot_next [LANES];
  logic [LANES-1:0]      fire, fneg, lane_ok;
  localparam int IW = $clog2(GROUPS * LANES);
  logic [IW-1:0]         idx   [LANES];

  for (genvar m = 0; m < LANES; m++) begin : g_idx
    assign idx[m]     = IW'(int'(grp) * LANES + m);
    assign lane_ok[m] = (int'(idx[m]) < N);
  end

  for (genvar k = 0; k < K; k++) begin : g_up
    logic [LANES-1:0] en, ng;
    always_comb begin
      for (int m = 0; m < LANES; m++) begin
        en[m] = acc && lane_ok[m] && (up_bsp[k].tau == now)
                && (own_t[lane_ok[m] ? idx[m] : '0] < up_t[k]);
        ng[m] = up_bsp[k].neg;
      end
    end
    weight_select u_sel (.word(up_word[k]), .en(en), .neg(ng), .sel(sel[k]));
  end

  for (genvar m = 0; m < LANES; m++) begin : g_lane
    always_comb
      for (int k = 0; k < K; k++) col[m][k] = sel[k][m];

    adder_tree #(.N(K), .IW(W_BITS), .OW(TW)) u_tree (.in(col[m]), .sum(sum[m]));

    assign pot_next[m] = pot[lane_ok[m] ? idx[m] : '0] + VW'(sum[m]);

    threshold_comparator #(.VW(VW)) u_cmp (
      .v       (pot_next[m]),
      .theta   (theta_b),
      .bipolar (1'b1),
      .fired   (bfired[lane_ok[m] ? idx[m] : '0]),
      .fire    (fire[m]),
      .neg     (fneg[m])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < N; i++) begin
        pot[i]     <= '0;
        bsp[i].neg <= 1'b0;
        bsp[i].tau <= stime_t'(TMAX);
      end
      bfired <= '0;
    end else if (clear) begin
      for (int i = 0; i < N; i++) begin
        pot[i]     <= '0;
        bsp[i].neg <= 1'b0;
        bsp[i].tau <= stime_t'(TMAX);
      end
      bfired <= '0;
    end else if (acc) begin
      for (int m = 0; m < LANES; m++) begin
        if (lane_ok[m]) begin
          pot[idx[m]] <= pot_next[m];
          if (fire[m]) begin
            bfired[idx[m]]  <= 1'b1;
            bsp[idx[m]].neg <= fneg[m];
            bsp[idx[m]].tau <= now;
          end
        end
      end
    end
  end

  always_comb begin
    for (int i = 0; i < N; i++) begin
      if (!bfired[i])      delta[i] = '0;
      else if (bsp[i].neg) delta[i] = -delta_t'((TMAX - int'(bsp[i].tau)) << 5);
      else                 delta[i] =  delta_t'((TMAX - int'(bsp[i].tau)) << 5);
    end
  end

endmodule
