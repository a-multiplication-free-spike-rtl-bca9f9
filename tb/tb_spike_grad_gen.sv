// tb_spike_grad_gen: random Q1.9 deltas (sparse and dense, all-zero cases);
// checks tau = 15 - round(15|d|/sum|d|) (halves up, via integer arithmetic
// floor((30|d| + S) / 2S)) and the sign; d = 0 must give tau = 15.
module tb_spike_grad_gen;
  import snn_pkg::*;
  delta_t delta [10]; bspike_t bsp [10];
  int checks = 0, failures = 0, n_pos = 0, n_neg = 0;
  spike_grad_gen dut (.delta, .bsp);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int r = 0; r < 2000; r++) begin
      automatic int S = 0;
      for (int j = 0; j < 10; j++) begin
        delta[j] = (r % 50 == 0) ? '0 : ($urandom_range(0, 2) == 0) ? 10'($urandom_range(0, 1022) - 511) : '0;
        S += (delta[j] < 0) ? -int'(delta[j]) : int'(delta[j]);
      end
      #1;
      for (int j = 0; j < 10; j++) begin
        automatic int a = (delta[j] < 0) ? -int'(delta[j]) : int'(delta[j]);
        automatic int d = (S == 0) ? 0 : (30 * a + S) / (2 * S);
        checks++;
        if (int'(bsp[j].tau) != 15 - d || (d > 0 && bsp[j].neg != (delta[j] < 0))) begin
          failures++; if (failures < 10) $display("FAIL r=%0d j=%0d a=%0d S=%0d tau=%0d", r, j, a, S, bsp[j].tau);
        end
        if (d > 0) begin if (delta[j] < 0) n_neg++; else n_pos++; end
      end
    end
    checks++; if (n_pos == 0 || n_neg == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
