// tb_input_spike_mem: writes random spike-time words and reads them back,
// checking the one-clock read latency and that a write leaves other words
// untouched.
module tb_input_spike_mem;
  logic clk = 0, we = 0;
  logic [3:0] waddr = 0, raddr = 0;
  logic [15:0] wdata = 0, rdata;
  logic [15:0] model [16];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;
  input_spike_mem dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int a = 0; a < 16; a++) begin
      model[a] = 16'($urandom);
      we = 1; waddr = 4'(a); wdata = model[a]; @(posedge clk); #1;
    end
    we = 0;
    for (int r = 0; r < 200; r++) begin
      automatic logic [3:0] a = 4'($urandom_range(0, 15));
      if ($urandom_range(0, 3) == 0) begin
        we = 1; waddr = 4'($urandom_range(0, 15)); wdata = 16'($urandom);
      end else we = 0;
      raddr = a;
      @(posedge clk); #1;
      checks++;
      if (rdata != model[a]) begin failures++; $display("FAIL addr %0d", a); end
      if (we) model[waddr] = wdata;
      we = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
