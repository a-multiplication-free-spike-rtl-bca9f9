// tb_delta_calculator: random output spike times (some all-silent cases),
// labels and gamma; checks each delta against (t - T)*512/15 (truncated,
// saturated to +-511) with T from the paper's target rule.
module tb_delta_calculator;
  import snn_pkg::*;
  stime_t times [10]; logic [3:0] label; stime_t gamma; delta_t delta [10];
  int checks = 0, failures = 0, n_silent = 0;
  delta_calculator dut (.times, .label, .gamma, .delta);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int r = 0; r < 2000; r++) begin
      automatic int tmin = 15;
      for (int j = 0; j < 10; j++) times[j] = (r % 9 == 0) ? 4'd15 : 4'($urandom_range(0, 15));
      label = 4'($urandom_range(0, 9)); gamma = 4'($urandom_range(0, 6));
      #1;
      foreach (times[j]) if (times[j] < tmin) tmin = times[j];
      if (tmin == 15) n_silent++;
      for (int j = 0; j < 10; j++) begin
        automatic int T, e, t = times[j], g = gamma;
        if (tmin == 15) T = (j == label) ? 15 - g : 15;
        else if (j == label) T = tmin - g;
        else if (t < tmin + g) T = tmin + g;
        else T = t;
        e = ((t - T) * 512) / 15;
        if (e > 511) e = 511; if (e < -511) e = -511;
        checks++;
        if (int'(delta[j]) != e) begin failures++; if (failures < 10) $display("FAIL r=%0d j=%0d got %0d exp %0d", r, j, delta[j], e); end
      end
    end
    checks++; if (n_silent == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
