// tb_fc_layer: a 64-input, 20-neuron layer against an integer model.
//
// Loads random weights through the host port, then runs samples of 15 time
// steps; each step sweeps the 16 words with one word per clock, feeding the
// presynaptic spike-time word in the data stage as the layer requires.
// After every step it compares all spike times and potentials with the model
// (a neuron's spike must be visible right after its step's last word, i.e.
// a step costs exactly 16 clocks). Then it runs an OP_UPD sweep with random
// deltas and reads every word back with OP_READ, comparing with the gated,
// saturating update of the model.
module tb_fc_layer;
  import snn_pkg::*;
  localparam int NI = 64, NO = 20, G = NI / 4;
  logic clk = 0, rst_n = 0, clear = 0;
  layer_op_e op = OP_NOP; logic [3:0] addr = 0; stime_t now = 0; logic step_end = 0;
  logic [15:0] pre_word; weight_t theta; delta_t delta [NO]; logic [9:0] lr = 700;
  logic ld_we = 0; logic [4:0] ld_sel = 0; logic [3:0] ld_addr = 0; logic [47:0] ld_data = 0;
  layer_op_e op_q; logic [3:0] addr_q; logic [47:0] rdata [NO]; stime_t spike_t [NO];
  logic [NO-1:0] fired; logic signed [17:0] v [NO];
  int W [NO][NI], pre [NI], mt [NO], mv [NO];
  int checks = 0, failures = 0, n_fire = 0, n_upd = 0;
  always #5 clk = ~clk;

  fc_layer dut (.clk, .rst_n, .clear, .op, .addr, .now, .step_end, .pre_word, .theta, .delta, .lr,
                .ld_we, .ld_sel, .ld_addr, .ld_data, .op_q, .addr_q, .rdata, .spike_t, .fired, .v);

  always_comb
    for (int m = 0; m < 4; m++) pre_word[4*m +: 4] = 4'(pre[4*int'(addr_q) + m]);

  task automatic chk(bit ok, string s);
    checks++; if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", s); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    foreach (W[j, i]) W[j][i] = $urandom_range(0, 300) - 80;
    W[3][0] = 2045;
    @(posedge clk); #1 rst_n = 1;
    for (int j = 0; j < NO; j++) for (int a = 0; a < G; a++) begin
      ld_we = 1; ld_sel = 5'(j); ld_addr = 4'(a);
      ld_data = {12'(W[j][4*a+3]), 12'(W[j][4*a+2]), 12'(W[j][4*a+1]), 12'(W[j][4*a])};
      @(posedge clk); #1;
    end
    ld_we = 0;
    for (int s = 0; s < 6; s++) begin
      theta = 12'($urandom_range(300, 900));
      foreach (pre[i]) pre[i] = (i % 5 == 0) ? 15 : $urandom_range(0, 14);
      foreach (mt[j]) begin mt[j] = 15; mv[j] = 0; end
      clear = 1; @(posedge clk); #1 clear = 0;
      for (int t = 0; t < 15; t++) begin
        for (int a = 0; a < G; a++) begin
          op = OP_FWD; addr = 4'(a); now = 4'(t); step_end = (a == G - 1);
          @(posedge clk); #1;
        end
        op = OP_NOP; step_end = 0;
        @(posedge clk); #1;   // data stage of the last word
        for (int j = 0; j < NO; j++) begin
          for (int i = 0; i < NI; i++) if (pre[i] == t) mv[j] += W[j][i];
          if (mt[j] == 15 && mv[j] >= int'(theta)) begin mt[j] = t; n_fire++; end
          chk(int'(spike_t[j]) == mt[j] && int'(v[j]) == mv[j] && fired[j] == (mt[j] < 15),
              $sformatf("s%0d t%0d n%0d time %0d/%0d v %0d/%0d", s, t, j, spike_t[j], mt[j], v[j], mv[j]));
        end
      end
      // weight update sweep
      for (int j = 0; j < NO; j++) delta[j] = 10'($urandom_range(0, 1022) - 511);
      for (int a = 0; a < G; a++) begin
        op = OP_UPD; addr = 4'(a);
        @(posedge clk); #1;
      end
      op = OP_NOP; @(posedge clk); #1;
      for (int j = 0; j < NO; j++) for (int i = 0; i < NI; i++)
        if (pre[i] < mt[j]) begin
          automatic int n = W[j][i] + ((int'(delta[j]) * int'(lr)) >>> 12);
          W[j][i] = (n > 2047) ? 2047 : (n < -2048) ? -2048 : n;
          n_upd++;
        end
      for (int a = 0; a < G; a++) begin
        op = OP_READ; addr = 4'(a);
        @(posedge clk); #1;
        for (int j = 0; j < NO; j++)
          chk(rdata[j] == {12'(W[j][4*a+3]), 12'(W[j][4*a+2]), 12'(W[j][4*a+1]), 12'(W[j][4*a])},
              $sformatf("s%0d word %0d neuron %0d after update", s, a, j));
      end
      op = OP_NOP;
    end
    chk(n_fire > 0 && n_upd > 0, "no fire or no update");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
