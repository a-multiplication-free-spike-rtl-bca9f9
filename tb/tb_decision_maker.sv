// tb_decision_maker: random output spike times and potentials; checks the
// class is the earliest firing neuron (lowest index on ties) and, when no
// neuron fired, the neuron with the largest potential.
module tb_decision_maker;
  import snn_pkg::*;
  stime_t times [10]; logic [9:0] fired; logic signed [17:0] v [10];
  logic [3:0] cls; logic any_fired;
  int checks = 0, failures = 0, n_pot = 0;
  decision_maker dut (.times, .fired, .v, .cls, .any_fired);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int r = 0; r < 2000; r++) begin
      automatic int e = 0, bt = 99, bv;
      for (int j = 0; j < 10; j++) begin
        fired[j] = (r % 4 != 0) && ($urandom_range(0, 2) == 0);
        times[j] = fired[j] ? 4'($urandom_range(0, 14)) : 4'd15;
        v[j] = 18'($urandom_range(0, 4000) - 2000);
      end
      #1;
      if (fired != 0) begin
        for (int j = 0; j < 10; j++) if (fired[j] && int'(times[j]) < bt) begin bt = times[j]; e = j; end
      end else begin
        n_pot++;
        bv = v[0];
        for (int j = 0; j < 10; j++) if (v[j] > bv) begin bv = v[j]; e = j; end
      end
      checks++;
      if (int'(cls) != e || any_fired != (fired != 0)) begin failures++; if (failures < 10) $display("FAIL r=%0d cls=%0d exp=%0d", r, cls, e); end
    end
    checks++; if (n_pot == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
