// tb_weight_bram: random reads and writes on the dual-port weight memory.
// Checks the read data one clock after the address, including a read of the
// word being written in the same clock (old data expected).
module tb_weight_bram;
  logic clk = 0, we = 0;
  logic [3:0] raddr = 0, waddr = 0;
  logic [47:0] rdata, wdata = 0;
  logic [47:0] model [16];
  int checks = 0, failures = 0, same = 0;
  always #5 clk = ~clk;
  weight_bram dut (.clk, .raddr, .rdata, .we, .waddr, .wdata);
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int a = 0; a < 16; a++) begin
      model[a] = {$urandom, $urandom} & 48'hFFFF_FFFF_FFFF;
      we = 1; waddr = 4'(a); wdata = model[a]; @(posedge clk); #1;
    end
    for (int r = 0; r < 400; r++) begin
      automatic logic [47:0] exp;
      raddr = 4'($urandom_range(0, 15));
      we = $urandom_range(0, 1);
      waddr = ($urandom_range(0, 3) == 0) ? raddr : 4'($urandom_range(0, 15));
      wdata = {$urandom, $urandom} & 48'hFFFF_FFFF_FFFF;
      exp = model[raddr];
      if (we && waddr == raddr) same++;
      @(posedge clk); #1;
      if (we) model[waddr] = wdata;
      checks++;
      if (rdata != exp) begin failures++; if (failures < 10) $display("FAIL r=%0d", r); end
    end
    checks++; if (same == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
