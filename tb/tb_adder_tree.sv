// tb_adder_tree: random signed operands for a 4-input and a 10-input tree
// (the two sizes the design uses); checks the sums, including all-extreme
// operands.
module tb_adder_tree;
  logic signed [11:0] a4 [4]; logic signed [13:0] s4;
  logic signed [11:0] a10 [10]; logic signed [15:0] s10;
  int checks = 0, failures = 0;
  adder_tree dut4 (.in(a4), .sum(s4));
  adder_tree #(.N(10), .IW(12), .OW(16)) dut10 (.in(a10), .sum(s10));
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int r = 0; r < 2000; r++) begin
      automatic int e4 = 0, e10 = 0;
      foreach (a4[i])  begin a4[i]  = (r == 0) ? -12'sd2048 : (r == 1) ? 12'sd2047 : 12'($urandom); e4 += int'(a4[i]); end
      foreach (a10[i]) begin a10[i] = (r == 0) ? -12'sd2048 : (r == 1) ? 12'sd2047 : 12'($urandom); e10 += int'(a10[i]); end
      #1;
      checks += 2;
      if (int'(s4) != e4) begin failures++; if (failures < 10) $display("FAIL 4: %0d vs %0d", s4, e4); end
      if (int'(s10) != e10) begin failures++; if (failures < 10) $display("FAIL 10: %0d vs %0d", s10, e10); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
