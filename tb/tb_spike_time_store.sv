// tb_spike_time_store: random write-enable vectors and times, periodic
// clears; checks all stored times against a model (15 after clear/reset).
module tb_spike_time_store;
  import snn_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0; logic [19:0] we = 0; stime_t now = 0;
  stime_t times [20]; int model [20];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  spike_time_store dut (.clk, .rst_n, .clear, .we, .now, .times);
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    foreach (model[i]) model[i] = 15;
    @(posedge clk); #1 rst_n = 1;
    for (int c = 0; c < 500; c++) begin
      clear = (c % 37 == 0);
      we = 20'($urandom) & 20'($urandom);
      now = 4'($urandom_range(0, 14));
      @(posedge clk); #1;
      for (int i = 0; i < 20; i++)
        if (clear) model[i] = 15; else if (we[i]) model[i] = int'(now);
      foreach (model[i]) begin
        checks++;
        if (int'(times[i]) != model[i]) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
