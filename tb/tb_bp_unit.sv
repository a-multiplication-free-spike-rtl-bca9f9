// tb_bp_unit: backward IF neurons of a 20-neuron hidden layer fed by 10
// upstream neurons.
//
// For each trial it draws random upstream weights, forward spike times of
// both layers, upstream backward spikes (sign and time) and a backward
// threshold, then drives 15 backward steps of 5 groups each, one group per
// clock, presenting word g of every upstream neuron. A model computes the
// backward potentials (only upstream spikes at the current step whose
// synapse has t_own < t_up count, negative spikes subtract), the first
// threshold crossing of each neuron and its delta sign*(15-tau)*32. The
// testbench compares backward spikes after every step and deltas at the end.
module tb_bp_unit;
  import snn_pkg::*;
  localparam int N = 20, K = 10, G = 5;
  logic clk = 0, rst_n = 0, clear = 0, acc = 0;
  logic [2:0] grp = 0; stime_t now = 0;
  logic [47:0] up_word [K]; bspike_t up_bsp [K]; stime_t up_t [K]; stime_t own_t [N];
  weight_t theta_b; bspike_t bsp [N]; delta_t delta [N];
  int W [K][N], pot [N], ot [N], on [N];
  int checks = 0, failures = 0, n_pos = 0, n_neg = 0;
  always #5 clk = ~clk;

  bp_unit dut (.clk, .rst_n, .clear, .acc, .grp, .now, .up_word, .up_bsp, .up_t, .own_t, .theta_b, .bsp, .delta);

  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    @(posedge clk); #1 rst_n = 1;
    for (int trial = 0; trial < 20; trial++) begin
      foreach (W[k, i]) W[k][i] = $urandom_range(0, 1200) - 600;
      if (trial == 0) W[0][0] = -2048;
      foreach (up_t[k]) up_t[k] = 4'($urandom_range(0, 15));
      foreach (own_t[i]) own_t[i] = 4'($urandom_range(0, 15));
      foreach (up_bsp[k]) begin
        up_bsp[k].tau = ($urandom_range(0, 3) == 0) ? 4'd15 : 4'($urandom_range(0, 14));
        up_bsp[k].neg = $urandom_range(0, 1);
      end
      theta_b = 12'($urandom_range(50, 900));
      foreach (pot[i]) begin pot[i] = 0; ot[i] = 15; on[i] = 0; end
      clear = 1; @(posedge clk); #1 clear = 0;
      for (int tau = 0; tau < 15; tau++) begin
        for (int g = 0; g < G; g++) begin
          acc = 1; grp = 3'(g); now = 4'(tau);
          for (int k = 0; k < K; k++)
            up_word[k] = {12'(W[k][4*g+3]), 12'(W[k][4*g+2]), 12'(W[k][4*g+1]), 12'(W[k][4*g])};
          @(posedge clk); #1;
        end
        acc = 0;
        for (int i = 0; i < N; i++) begin
          for (int k = 0; k < K; k++)
            if (int'(up_bsp[k].tau) == tau && own_t[i] < up_t[k])
              pot[i] += up_bsp[k].neg ? ((W[k][i] == -2048) ? 2047 : -W[k][i]) : W[k][i];
          if (ot[i] == 15) begin
            if (pot[i] > int'(theta_b)) begin ot[i] = tau; on[i] = 0; n_pos++; end
            else if (pot[i] < -int'(theta_b)) begin ot[i] = tau; on[i] = 1; n_neg++; end
          end
          chk(int'(bsp[i].tau) == ot[i] && (ot[i] == 15 || bsp[i].neg == on[i]),
              $sformatf("trial %0d step %0d neuron %0d: tau %0d exp %0d", trial, tau, i, bsp[i].tau, ot[i]));
        end
      end
      for (int i = 0; i < N; i++) begin
        automatic int e = (ot[i] == 15) ? 0 : (on[i] ? -(15 - ot[i]) * 32 : (15 - ot[i]) * 32);
        chk(int'(delta[i]) == e, $sformatf("trial %0d neuron %0d delta %0d exp %0d", trial, i, delta[i], e));
      end
    end
    chk(n_pos > 0 && n_neg > 0, "backward spikes of one sign never occurred");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
