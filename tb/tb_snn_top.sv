// tb_snn_top: end-to-end test of the trainable network at its default size.
//
// The testbench holds its own behavioural model of the whole algorithm
// (forward IF layers, decision, target times, deltas, backward spike
// generation, output update, spike-time backpropagation, hidden updates),
// written from the equations with plain integers and independent of the
// RTL's structure. For each sample it latency-codes random 4-bit pixels
// (t = 15 - pixel), loads them, runs the network in inference or training
// mode and compares class, every forward spike time, the output backward
// spikes and, at the end and every few samples, every weight word read back
// from the BRAMs. It also checks the cycle count of both modes and counts
// how often each mechanism occurred (forward fire, virtual spike, decision by
// potential, all-silent target, STP/STN output spikes, positive/negative
// hidden backward spikes, gated and applied updates, inference and training
// runs; weight saturation is only counted); a mechanism that never occurred counts as a failure.
module tb_snn_top;
  import snn_pkg::*;

  localparam int N_IN = 64, N_H1 = 20, N_H2 = 20, N_OUT = 10, TS = 15, LRS = 12;
  localparam int G1 = N_IN / 4, G2 = N_H1 / 4, G3 = N_H2 / 4;
  localparam int SAMPLES = 60;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start = 0, train = 0;
  logic [3:0] label = 0;
  stime_t gamma = 3;
  logic [9:0] lr = 512;
  weight_t th1, th2, tho, thb;
  logic busy, done;
  logic in_we = 0; logic [3:0] in_addr = 0; logic [15:0] in_data = 0;
  logic ld_we = 0; logic [1:0] ld_layer = 0; logic [4:0] ld_sel = 0; logic [4:0] ld_addr = 0;
  logic [47:0] ld_data = 0;
  logic rb_en = 0; logic [1:0] rb_layer = 0; logic [4:0] rb_sel = 0; logic [4:0] rb_addr = 0;
  logic [47:0] rb_data;
  logic [3:0] cls; logic any_fired;
  stime_t out_t [N_OUT]; stime_t h1_t [N_H1]; stime_t h2_t [N_H2];
  bspike_t bsp_o [N_OUT];

  snn_top dut (
    .clk, .rst_n, .start, .train, .label, .gamma, .lr,
    .theta_h1(th1), .theta_h2(th2), .theta_o(tho), .theta_b(thb),
    .busy, .done, .in_we, .in_addr, .in_data,
    .ld_we, .ld_layer, .ld_sel, .ld_addr, .ld_data,
    .rb_en, .rb_layer, .rb_sel, .rb_addr, .rb_data,
    .cls, .any_fired, .out_t, .h1_t, .h2_t, .bsp_o
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
  int W1 [N_H1][N_IN];
  int W2 [N_H2][N_H1];
  int W3 [N_OUT][N_H2];
  int tin [N_IN];
  int t1 [N_H1], t2 [N_H2], t3 [N_OUT];
  int V1 [N_H1], V2 [N_H2], V3 [N_OUT];
  int m_cls, m_any;
  int dlt [N_OUT], bneg [N_OUT], btau [N_OUT];
  int b2neg [N_H2], b2tau [N_H2], d2m [N_H2];
  int b1neg [N_H1], b1tau [N_H1], d1m [N_H1];

  // mechanism counters
  int n_fire, n_virtual, n_by_pot, n_silent_tgt, n_stp, n_stn, n_hpos, n_hneg;
  int n_upd_on, n_upd_off, n_infer, n_train, n_sat;

  function automatic int sat12(int x);
    if (x > 2047) begin n_sat++; return 2047; end
    if (x < -2048) begin n_sat++; return -2048; end
    return x;
  endfunction

  function automatic int dw_of(int d);
    int p = d * int'(lr);
    return p >>> LRS;
  endfunction

  task automatic model_forward(int a1, int a2, int a3);
    for (int j = 0; j < N_H1; j++) begin V1[j] = 0; t1[j] = 15; end
    for (int j = 0; j < N_H2; j++) begin V2[j] = 0; t2[j] = 15; end
    for (int j = 0; j < N_OUT; j++) begin V3[j] = 0; t3[j] = 15; end
    for (int t = 0; t < TS; t++) begin
      for (int j = 0; j < N_H1; j++) begin
        for (int i = 0; i < N_IN; i++) if (tin[i] == t) V1[j] += W1[j][i];
        if (t1[j] == 15 && V1[j] >= a1) t1[j] = t;
      end
      for (int j = 0; j < N_H2; j++) begin
        for (int i = 0; i < N_H1; i++) if (t1[i] == t) V2[j] += W2[j][i];
        if (t2[j] == 15 && V2[j] >= a2) t2[j] = t;
      end
      for (int j = 0; j < N_OUT; j++) begin
        for (int i = 0; i < N_H2; i++) if (t2[i] == t) V3[j] += W3[j][i];
        if (t3[j] == 15 && V3[j] >= a3) t3[j] = t;
      end
    end
    m_any = 0; m_cls = 0;
    begin
      int bt = 16, bv = V3[0], bi = 0;
      for (int j = 0; j < N_OUT; j++) begin
        if (t3[j] < 15) m_any = 1;
        if (t3[j] < bt) begin bt = t3[j]; m_cls = j; end
        if (V3[j] > bv) begin bv = V3[j]; bi = j; end
      end
      if (!m_any) m_cls = bi;
    end
    foreach (t1[j]) if (t1[j] < 15) n_fire++; else n_virtual++;
    foreach (t3[j]) if (t3[j] == 15) n_virtual++;
    if (!m_any) n_by_pot++;
  endtask

  function automatic int neg_w(int w);
    return (w == -2048) ? 2047 : -w;
  endfunction

  // backward IF neurons: own layer n neurons, upstream k neurons with weights Wup[k][i]
  task automatic model_bp(input int n, input int k, input int own_t[], input int up_t[],
                          input int up_neg[], input int up_tau[], input int Wup[][],
                          output int on[], output int ot[], output int od[]);
    int pot [];
    pot = new[n]; on = new[n]; ot = new[n]; od = new[n];
    for (int i = 0; i < n; i++) begin pot[i] = 0; on[i] = 0; ot[i] = 15; od[i] = 0; end
    for (int tau = 0; tau < TS; tau++)
      for (int i = 0; i < n; i++) begin
        for (int q = 0; q < k; q++)
          if (up_tau[q] == tau && own_t[i] < up_t[q])
            pot[i] += up_neg[q] ? neg_w(Wup[q][i]) : Wup[q][i];
        if (ot[i] == 15) begin
          if (pot[i] > int'(thb))       begin ot[i] = tau; on[i] = 0; end
          else if (pot[i] < -int'(thb)) begin ot[i] = tau; on[i] = 1; end
        end
      end
    for (int i = 0; i < n; i++)
      if (ot[i] < 15) begin
        od[i] = on[i] ? -((15 - ot[i]) * 32) : (15 - ot[i]) * 32;
        if (on[i]) n_hneg++; else n_hpos++;
      end
  endtask

  task automatic model_train(int lbl);
    int tmin = 15, T [N_OUT], S = 0;
    int own[], up[], un[], ut[], wup[][], on[], ot[], od[];
    for (int j = 0; j < N_OUT; j++) if (t3[j] < tmin) tmin = t3[j];
    for (int j = 0; j < N_OUT; j++) begin
      if (tmin == 15) T[j] = (j == lbl) ? 15 - int'(gamma) : 15;
      else if (j == lbl) T[j] = tmin - int'(gamma);
      else if (t3[j] < tmin + int'(gamma)) T[j] = tmin + int'(gamma);
      else T[j] = t3[j];
      // delta = (t - T)/15 in Q1.9, truncated toward zero, saturated
      dlt[j] = ((t3[j] - T[j]) * 512) / 15;
      if (dlt[j] > 511) dlt[j] = 511;
      if (dlt[j] < -511) dlt[j] = -511;
    end
    if (tmin == 15) n_silent_tgt++;
    for (int j = 0; j < N_OUT; j++) S += (dlt[j] < 0) ? -dlt[j] : dlt[j];
    for (int j = 0; j < N_OUT; j++) begin
      int a = (dlt[j] < 0) ? -dlt[j] : dlt[j];
      int d = (S == 0) ? 0 : (30 * a + S) / (2 * S);
      if (d > 15) d = 15;
      btau[j] = 15 - d;
      bneg[j] = dlt[j] < 0;
      if (d > 0) begin if (bneg[j]) n_stn++; else n_stp++; end
    end
    // output weight update
    for (int k = 0; k < N_OUT; k++)
      for (int i = 0; i < N_H2; i++)
        if (t2[i] < t3[k]) begin W3[k][i] = sat12(W3[k][i] + dw_of(dlt[k])); n_upd_on++; end
        else n_upd_off++;
    // backprop to hidden 2 through the updated output weights
    own = new[N_H2]; foreach (own[i]) own[i] = t2[i];
    up = new[N_OUT]; un = new[N_OUT]; ut = new[N_OUT];
    foreach (up[q]) begin up[q] = t3[q]; un[q] = bneg[q]; ut[q] = btau[q]; end
    wup = new[N_OUT]; foreach (wup[q]) begin wup[q] = new[N_H2]; foreach (wup[q][i]) wup[q][i] = W3[q][i]; end
    model_bp(N_H2, N_OUT, own, up, un, ut, wup, on, ot, od);
    foreach (on[i]) begin b2neg[i] = on[i]; b2tau[i] = ot[i]; d2m[i] = od[i]; end
    for (int k = 0; k < N_H2; k++)
      for (int i = 0; i < N_H1; i++)
        if (t1[i] < t2[k]) begin W2[k][i] = sat12(W2[k][i] + dw_of(d2m[k])); n_upd_on++; end
        else n_upd_off++;
    // backprop to hidden 1 through the updated hidden-2 weights
    own = new[N_H1]; foreach (own[i]) own[i] = t1[i];
    up = new[N_H2]; un = new[N_H2]; ut = new[N_H2];
    foreach (up[q]) begin up[q] = t2[q]; un[q] = b2neg[q]; ut[q] = b2tau[q]; end
    wup = new[N_H2]; foreach (wup[q]) begin wup[q] = new[N_H1]; foreach (wup[q][i]) wup[q][i] = W2[q][i]; end
    model_bp(N_H1, N_H2, own, up, un, ut, wup, on, ot, od);
    foreach (on[i]) begin b1neg[i] = on[i]; b1tau[i] = ot[i]; d1m[i] = od[i]; end
    for (int k = 0; k < N_H1; k++)
      for (int i = 0; i < N_IN; i++)
        if (tin[i] < t1[k]) begin W1[k][i] = sat12(W1[k][i] + dw_of(d1m[k])); n_upd_on++; end
        else n_upd_off++;
  endtask

  // ---------------- host access ----------------
  function automatic logic [47:0] pack(int a, int b, int c, int d);
    return {12'(d), 12'(c), 12'(b), 12'(a)};
  endfunction

  task automatic load_word(int layer, int sel, int addr, logic [47:0] data);
    ld_we = 1; ld_layer = 2'(layer); ld_sel = 5'(sel); ld_addr = 5'(addr); ld_data = data;
    @(posedge clk); #1 ld_we = 0;
  endtask

  task automatic load_all();
    for (int n = 0; n < N_H1; n++) for (int a = 0; a < G1; a++)
      load_word(0, n, a, pack(W1[n][4*a], W1[n][4*a+1], W1[n][4*a+2], W1[n][4*a+3]));
    for (int n = 0; n < N_H2; n++) for (int a = 0; a < G2; a++)
      load_word(1, n, a, pack(W2[n][4*a], W2[n][4*a+1], W2[n][4*a+2], W2[n][4*a+3]));
    for (int n = 0; n < N_OUT; n++) for (int a = 0; a < G3; a++)
      load_word(2, n, a, pack(W3[n][4*a], W3[n][4*a+1], W3[n][4*a+2], W3[n][4*a+3]));
  endtask

  task automatic read_word(int layer, int sel, int addr, output logic [47:0] data);
    rb_en = 1; rb_layer = 2'(layer); rb_sel = 5'(sel); rb_addr = 5'(addr);
    @(posedge clk); #1 rb_en = 0;
    data = rb_data;
  endtask

  task automatic compare_weights();
    logic [47:0] w;
    int bad = 0;
    for (int n = 0; n < N_H1; n++) for (int a = 0; a < G1; a++) begin
      read_word(0, n, a, w);
      if (w != pack(W1[n][4*a], W1[n][4*a+1], W1[n][4*a+2], W1[n][4*a+3])) bad++;
    end
    for (int n = 0; n < N_H2; n++) for (int a = 0; a < G2; a++) begin
      read_word(1, n, a, w);
      if (w != pack(W2[n][4*a], W2[n][4*a+1], W2[n][4*a+2], W2[n][4*a+3])) bad++;
    end
    for (int n = 0; n < N_OUT; n++) for (int a = 0; a < G3; a++) begin
      read_word(2, n, a, w);
      if (w != pack(W3[n][4*a], W3[n][4*a+1], W3[n][4*a+2], W3[n][4*a+3])) bad++;
    end
    check(bad == 0, $sformatf("%0d weight words differ from the model", bad));
  endtask

  int cycles;

  task automatic run_sample(int s, bit do_train);
    int pix;
    // latency coding of random 4-bit pixels; about a third are dark (t = 15)
    // every seventh sample is a blank image: nothing fires anywhere
    for (int i = 0; i < N_IN; i++) begin
      pix = ($urandom_range(0, 2) == 0 || s % 7 == 3) ? 0 : $urandom_range(1, 15);
      tin[i] = 15 - pix;
    end
    for (int a = 0; a < G1; a++) begin
      in_we = 1; in_addr = 4'(a);
      in_data = {4'(tin[4*a+3]), 4'(tin[4*a+2]), 4'(tin[4*a+1]), 4'(tin[4*a])};
      @(posedge clk); #1;
    end
    in_we = 0;
    label = 4'($urandom_range(0, N_OUT - 1));
    train = do_train;
    // every eleventh sample uses a high output threshold; every fifth uses
    // the largest learning rate
    tho = (s % 11 == 5) ? 12'sd1200 : weight_t'($urandom_range(150, 500));
    lr  = (s % 5 == 2) ? 10'd1023 : 10'd512;
    model_forward(th1, th2, tho);
    start = 1;
    @(posedge clk); #1 start = 0;
    cycles = 1;
    while (!done) begin @(posedge clk); #1 cycles++; end
    if (do_train) n_train++; else n_infer++;
    // clock edges from the one that samples start to the one after which
    // done is high: forward sweeps, drain, decide, finish (+ training phases)
    check(cycles == 1 + (do_train ? TS*(G1+G2+G3) + 3 + 2 + G3 + 1 + TS*G3 + G2 + 1 + TS*G2 + G1
                                  : TS*(G1+G2+G3) + 3),
          $sformatf("sample %0d: %0d cycles", s, cycles));
    check(int'(cls) == m_cls, $sformatf("sample %0d: class %0d, model %0d", s, cls, m_cls));
    check(any_fired == m_any, $sformatf("sample %0d: any_fired", s));
    begin
      int bad = 0;
      foreach (t1[j]) if (int'(h1_t[j]) != t1[j]) bad++;
      foreach (t2[j]) if (int'(h2_t[j]) != t2[j]) bad++;
      foreach (t3[j]) if (int'(out_t[j]) != t3[j]) bad++;
      check(bad == 0, $sformatf("sample %0d: %0d spike times differ", s, bad));
    end
    if (do_train) begin
      int bad = 0;
      model_train(int'(label));
      foreach (bneg[j]) if (int'(bsp_o[j].tau) != btau[j] || (btau[j] < 15 && int'(bsp_o[j].neg) != bneg[j])) bad++;
      check(bad == 0, $sformatf("sample %0d: %0d output backward spikes differ", s, bad));
      if (s % 10 == 9) compare_weights();
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    th1 = 12'sd300; th2 = 12'sd250; tho = 12'sd300; thb = 12'sd150;
    for (int j = 0; j < N_H1; j++) for (int i = 0; i < N_IN; i++) W1[j][i] = $urandom_range(0, 220) - 60;
    for (int j = 0; j < N_H2; j++) for (int i = 0; i < N_H1; i++) W2[j][i] = $urandom_range(0, 500) - 150;
    for (int j = 0; j < N_OUT; j++) for (int i = 0; i < N_H2; i++) W3[j][i] = $urandom_range(0, 500) - 150;
    // a few weights close to the limits so that saturation can occur
    for (int j = 0; j < N_OUT; j++) W3[j][0] = (j % 2) ? -2040 : 2040;
    W2[0][0] = 2040; W2[1][1] = -2040;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    load_all();
    compare_weights();
    for (int s = 0; s < SAMPLES; s++) run_sample(s, (s % 4) != 1);
    compare_weights();
    $display("mechanisms: fire=%0d virtual=%0d by_potential=%0d silent_target=%0d stp=%0d stn=%0d hidden_pos=%0d hidden_neg=%0d upd_on=%0d upd_off=%0d infer=%0d train=%0d sat=%0d",
             n_fire, n_virtual, n_by_pot, n_silent_tgt, n_stp, n_stn, n_hpos, n_hneg, n_upd_on, n_upd_off, n_infer, n_train, n_sat);
    check(n_fire > 0, "no forward spike");
    check(n_virtual > 0, "no virtual spike");
    check(n_by_pot > 0, "no decision by membrane potential");
    check(n_silent_tgt > 0, "no all-silent target case");
    check(n_stp > 0, "no positive output backward spike");
    check(n_stn > 0, "no negative output backward spike");
    check(n_hpos > 0, "no positive hidden backward spike");
    check(n_hneg > 0, "no negative hidden backward spike");
    check(n_upd_on > 0 && n_upd_off > 0, "update gate never on or never off");
    check(n_infer > 0 && n_train > 0, "a mode never ran");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
