// tb_fwd_64_20_10: inference of the two-layer 64-20-10 network at the
// 21-clock-per-step schedule used for the throughput figure.
//
// The trainable top wires three layers (64-20-20-10). The layer blocks at
// their default parameters are exactly the two layers of the smaller
// 64-20-10 network the paper uses to compare throughput: fc_layer is 64->20
// and output_layer is 20->10. This testbench joins them with the input
// spike memory and the digital timer, and drives the forward schedule
// itself: per time step 16 issue clocks of the hidden layer followed by 5 of
// the output layer, 15 steps, so 15 x 21 = 315 issue clocks per sample plus
// one clock for the last data stage. The timer advances on the last issue
// clock of each step.
//
// A plain-integer model of the IF equations (no leak, fire once at
// V >= theta, earliest output wins, highest potential if none fired) gives
// the expected spike times and class. Each sample has random weights and
// latency-coded pixels (t = 15 - pixel); some samples use a threshold no
// output reaches. Checked per sample: every hidden and output spike time,
// the class, any_fired and the number of clocks. Counted mechanisms, each
// of which must occur: forward spikes, virtual spikes (time 15), decision by
// potential, and an output spike in the same step as a hidden spike that
// caused it (the same-step hand-over between layers).
module tb_fwd_64_20_10;
  import snn_pkg::*;

  localparam int N_IN = 64, N_H = 20, N_OUT = 10, TS = 15;
  localparam int G1 = N_IN / 4, G2 = N_H / 4;
  localparam int SAMPLES = 40;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  // input memory
  logic        in_we = 0;
  logic [3:0]  in_addr = 0;
  logic [15:0] in_data = 0;
  logic [15:0] pre1, pre2;

  // schedule
  logic       t_clear = 0, t_inc = 0, t_last;
  stime_t     now;
  layer_op_e  op1 = OP_NOP, op2 = OP_NOP;
  logic [3:0] a1 = 0;
  logic [2:0] a2 = 0;
  logic       se1 = 0, se2 = 0, lclear = 0;

  // layer signals
  weight_t    th1, th2;
  delta_t     d1 [N_H];
  delta_t     d2 [N_OUT];
  logic [9:0] lr = 0;
  logic       ld1 = 0, ld2 = 0;
  logic [4:0] ld_sel = 0;
  logic [3:0] ld_addr = 0;
  logic [47:0] ld_data = 0;
  layer_op_e  op1_q, op2_q;
  logic [3:0] a1_q;
  logic [2:0] a2_q;
  logic [47:0] rd1 [N_H];
  logic [47:0] rd2 [N_OUT];
  stime_t     h_t [N_H];
  stime_t     o_t [N_OUT];
  logic [N_H-1:0]   f1;
  logic [N_OUT-1:0] f2;
  logic signed [17:0] v1 [N_H];
  logic signed [17:0] v2 [N_OUT];
  logic [3:0] cls;
  logic       any_fired;

  input_spike_mem u_in (.clk, .we(in_we), .waddr(in_addr), .wdata(in_data), .raddr(a1), .rdata(pre1));

  digital_timer u_timer (.clk, .rst_n, .clear(t_clear), .inc(t_inc), .now, .last(t_last));

  fc_layer u_h (
    .clk, .rst_n, .clear(lclear), .op(op1), .addr(a1), .now, .step_end(se1),
    .pre_word(pre1), .theta(th1), .delta(d1), .lr,
    .ld_we(ld1), .ld_sel(ld_sel), .ld_addr(ld_addr), .ld_data,
    .op_q(op1_q), .addr_q(a1_q), .rdata(rd1), .spike_t(h_t), .fired(f1), .v(v1)
  );

  // hidden spike times of inputs 4*a2_q .. 4*a2_q+3, taken in the data stage
  always_comb
    for (int m = 0; m < 4; m++) pre2[m*4 +: 4] = h_t[int'(a2_q)*4 + m];

  output_layer u_o (
    .clk, .rst_n, .clear(lclear), .op(op2), .addr(a2), .now, .step_end(se2),
    .pre_word(pre2), .theta(th2), .delta(d2), .lr,
    .ld_we(ld2), .ld_sel(ld_sel[3:0]), .ld_addr(ld_addr[2:0]), .ld_data,
    .op_q(op2_q), .addr_q(a2_q), .rdata(rd2), .spike_t(o_t), .fired(f2), .v(v2),
    .cls, .any_fired
  );

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  // ---------------- reference model ----------------
  int W1 [N_H][N_IN];
  int W2 [N_OUT][N_H];
  int tin [N_IN];
  int t1 [N_H], t2 [N_OUT];
  int m_cls, m_any;
  int n_fire, n_virtual, n_by_pot, n_same_step;

  task automatic model(int a, int b);
    int V1 [N_H], V2 [N_OUT];
    for (int j = 0; j < N_H; j++) begin V1[j] = 0; t1[j] = 15; end
    for (int j = 0; j < N_OUT; j++) begin V2[j] = 0; t2[j] = 15; end
    for (int t = 0; t < TS; t++) begin
      for (int j = 0; j < N_H; j++) begin
        for (int i = 0; i < N_IN; i++) if (tin[i] == t) V1[j] += W1[j][i];
        if (t1[j] == 15 && V1[j] >= a) t1[j] = t;
      end
      for (int j = 0; j < N_OUT; j++) begin
        int got = 0;
        for (int i = 0; i < N_H; i++) if (t1[i] == t) begin V2[j] += W2[j][i]; got = 1; end
        if (t2[j] == 15 && V2[j] >= b) begin t2[j] = t; if (got) n_same_step++; end
      end
    end
    m_any = 0; m_cls = 0;
    begin
      int bt = 16, bv = V2[0], bi = 0;
      for (int j = 0; j < N_OUT; j++) begin
        if (t2[j] < 15) m_any = 1;
        if (t2[j] < bt) begin bt = t2[j]; m_cls = j; end
        if (V2[j] > bv) begin bv = V2[j]; bi = j; end
      end
      if (!m_any) m_cls = bi;
    end
    foreach (t1[j]) if (t1[j] < 15) n_fire++; else n_virtual++;
    foreach (t2[j]) if (t2[j] < 15) n_fire++; else n_virtual++;
    if (!m_any) n_by_pot++;
  endtask

  function automatic logic [47:0] pack(int a, int b, int c, int d);
    return {12'(d), 12'(c), 12'(b), 12'(a)};
  endfunction

  task automatic load_weights();
    for (int n = 0; n < N_H; n++) for (int a = 0; a < G1; a++) begin
      ld1 = 1; ld_sel = 5'(n); ld_addr = 4'(a);
      ld_data = pack(W1[n][4*a], W1[n][4*a+1], W1[n][4*a+2], W1[n][4*a+3]);
      @(posedge clk); #1 ld1 = 0;
    end
    for (int n = 0; n < N_OUT; n++) for (int a = 0; a < G2; a++) begin
      ld2 = 1; ld_sel = 5'(n); ld_addr = 4'(a);
      ld_data = pack(W2[n][4*a], W2[n][4*a+1], W2[n][4*a+2], W2[n][4*a+3]);
      @(posedge clk); #1 ld2 = 0;
    end
  endtask

  // one sample: clear, then 15 steps of 16 + 5 issue clocks, then one drain
  // clock for the last data stage; returns the clocks from first issue on
  task automatic run_forward(output int cycles);
    lclear = 1; t_clear = 1;
    @(posedge clk); #1 lclear = 0; t_clear = 0;
    cycles = 0;
    for (int t = 0; t < TS; t++) begin
      for (int a = 0; a < G1; a++) begin
        op1 = OP_FWD; a1 = 4'(a); se1 = (a == G1 - 1);
        @(posedge clk); #1 cycles++;
      end
      op1 = OP_NOP; se1 = 0;
      for (int a = 0; a < G2; a++) begin
        op2 = OP_FWD; a2 = 3'(a); se2 = (a == G2 - 1); t_inc = (a == G2 - 1);
        @(posedge clk); #1 cycles++;
      end
      op2 = OP_NOP; se2 = 0; t_inc = 0;
    end
    @(posedge clk); #1 cycles++;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cycles;
    foreach (d1[j]) d1[j] = '0;
    foreach (d2[j]) d2[j] = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int s = 0; s < SAMPLES; s++) begin
      for (int j = 0; j < N_H; j++) for (int i = 0; i < N_IN; i++) W1[j][i] = $urandom_range(0, 220) - 60;
      // every sixth sample: weak output weights (at most 20 x 100) and an
      // output threshold of 2047, which no output neuron can reach
      for (int j = 0; j < N_OUT; j++) for (int i = 0; i < N_H; i++)
        W2[j][i] = (s % 6 == 4) ? $urandom_range(0, 250) - 150 : $urandom_range(0, 500) - 150;
      load_weights();
      for (int i = 0; i < N_IN; i++)
        tin[i] = ($urandom_range(0, 2) == 0) ? 15 : 15 - $urandom_range(1, 15);
      for (int a = 0; a < G1; a++) begin
        in_we = 1; in_addr = 4'(a);
        in_data = {4'(tin[4*a+3]), 4'(tin[4*a+2]), 4'(tin[4*a+1]), 4'(tin[4*a])};
        @(posedge clk); #1;
      end
      in_we = 0;
      th1 = weight_t'($urandom_range(200, 400));
      th2 = (s % 6 == 4) ? 12'sd2047 : weight_t'($urandom_range(150, 450));
      model(int'(th1), int'(th2));
      run_forward(cycles);
      check(cycles == TS * (G1 + G2) + 1, $sformatf("sample %0d: %0d clocks", s, cycles));
      begin
        int bad = 0;
        foreach (t1[j]) if (int'(h_t[j]) != t1[j]) bad++;
        foreach (t2[j]) if (int'(o_t[j]) != t2[j]) bad++;
        check(bad == 0, $sformatf("sample %0d: %0d spike times differ", s, bad));
      end
      // the decision maker reads the output spike times combinationally
      check(int'(cls) == m_cls, $sformatf("sample %0d: class %0d, model %0d", s, cls, m_cls));
      check(any_fired == m_any, $sformatf("sample %0d: any_fired", s));
    end
    $display("mechanisms: fire=%0d virtual=%0d by_potential=%0d same_step=%0d",
             n_fire, n_virtual, n_by_pot, n_same_step);
    check(n_fire > 0, "no forward spike");
    check(n_virtual > 0, "no virtual spike");
    check(n_by_pot > 0, "no decision by membrane potential");
    check(n_same_step > 0, "no same-step hand-over from hidden to output layer");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
