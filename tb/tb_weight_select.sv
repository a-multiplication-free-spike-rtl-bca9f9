// tb_weight_select: random weight words, lane enables and signs; checks each
// lane against +w, -w (with -(-2048) saturated to 2047) or 0.
module tb_weight_select;
  import snn_pkg::*;
  logic [47:0] word; logic [3:0] en, neg; weight_t sel [4];
  int checks = 0, failures = 0;
  weight_select dut (.word, .en, .neg, .sel);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int r = 0; r < 2000; r++) begin
      word = {$urandom, $urandom} & 48'hFFFF_FFFF_FFFF;
      if (r % 50 == 0) word[23:12] = 12'h800;
      en = 4'($urandom); neg = 4'($urandom);
      #1;
      for (int m = 0; m < 4; m++) begin
        automatic int w = int'($signed(word[12*m +: 12]));
        automatic int e = !en[m] ? 0 : !neg[m] ? w : (w == -2048 ? 2047 : -w);
        checks++;
        if (int'(sel[m]) != e) begin failures++; if (failures < 10) $display("FAIL lane %0d w=%0d got %0d", m, w, sel[m]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
