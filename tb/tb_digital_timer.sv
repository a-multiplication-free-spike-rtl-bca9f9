// tb_digital_timer: checks the shared time-step counter.
// Drives random clear/inc patterns and compares `now` and `last` with a
// software counter that wraps after T_STEPS-1; also checks reset.
module tb_digital_timer;
  import snn_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, inc = 0;
  stime_t now; logic last;
  int checks = 0, failures = 0, model = 0;
  always #5 clk = ~clk;
  digital_timer dut (.clk, .rst_n, .clear, .inc, .now, .last);
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    @(posedge clk); #1 rst_n = 1;
    checks++; if (now != 0) failures++;
    for (int c = 0; c < 1000; c++) begin
      clear = ($urandom_range(0, 40) == 0);
      inc   = ($urandom_range(0, 3) != 0);
      @(posedge clk); #1;
      if (clear) model = 0; else if (inc) model = (model == 14) ? 0 : model + 1;
      checks++;
      if (int'(now) != model || last != (model == 14)) begin
        failures++;
        if (failures < 10) $display("FAIL c=%0d now=%0d model=%0d", c, now, model);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
