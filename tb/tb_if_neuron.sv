// tb_if_neuron: drives a single neuron through random samples of 15 time
// steps, 16 words per step, with random weight words and match flags; checks
// the membrane potential after every word, the fire pulse (only on the last
// word of a step, when V >= theta, once per sample) and the fired flag.
module tb_if_neuron;
  import snn_pkg::*;
  logic clk = 0, rst_n = 0, clear = 0, acc = 0, step_end = 0;
  logic [3:0] match = 0; logic [47:0] word = 0; weight_t theta = 0;
  logic fire, fired; logic signed [17:0] v;
  int checks = 0, failures = 0, mv, mf, n_fire = 0;
  always #5 clk = ~clk;
  if_neuron dut (.clk, .rst_n, .clear, .acc, .step_end, .match, .word, .theta, .fire, .fired, .v);
  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    @(posedge clk); #1 rst_n = 1;
    for (int s = 0; s < 30; s++) begin
      clear = 1; @(posedge clk); #1 clear = 0;
      mv = 0; mf = 0;
      theta = 12'($urandom_range(100, 1500));
      for (int t = 0; t < 15; t++) for (int a = 0; a < 16; a++) begin
        automatic int sum = 0, ef;
        acc = ($urandom_range(0, 9) != 0) || (a == 15);
        step_end = (a == 15);
        match = 4'($urandom) & 4'($urandom);
        word = {$urandom, $urandom} & 48'hFFFF_FFFF_FFFF;
        for (int m = 0; m < 4; m++) if (match[m] && acc) sum += int'($signed(word[12*m +: 12])) / 8;
        // keep weights small: scale the word lanes to /8 like the sum above
        for (int m = 0; m < 4; m++) word[12*m +: 12] = 12'(int'($signed(word[12*m +: 12])) / 8);
        #1;
        ef = acc && step_end && !mf && (mv + sum >= int'(theta));
        checks++;
        if (fire != ef) begin failures++; if (failures < 10) $display("FAIL fire s=%0d t=%0d", s, t); end
        @(posedge clk); #1;
        if (acc) mv += sum;
        if (ef) begin mf = 1; n_fire++; end
        checks++;
        if (int'(v) != mv || fired != mf) begin failures++; if (failures < 10) $display("FAIL v=%0d mv=%0d", v, mv); end
      end
    end
    checks++; if (n_fire == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
