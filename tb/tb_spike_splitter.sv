// tb_spike_splitter: random 16-bit words and time steps; checks the four
// split times and the lane match flags (time == now and valid).
module tb_spike_splitter;
  import snn_pkg::*;
  logic [15:0] word; stime_t now; logic valid;
  stime_t times [4]; logic [3:0] match;
  int checks = 0, failures = 0;
  spike_splitter dut (.word, .now, .valid, .times, .match);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int r = 0; r < 2000; r++) begin
      word = 16'($urandom); now = 4'($urandom); valid = ($urandom_range(0, 4) != 0);
      if (r % 3 == 0) word[7:4] = now;
      #1;
      for (int m = 0; m < 4; m++) begin
        automatic int t = (word >> (4*m)) & 15;
        checks++;
        if (int'(times[m]) != t || match[m] != (valid && t == int'(now))) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
