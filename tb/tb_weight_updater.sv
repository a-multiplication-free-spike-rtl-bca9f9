// tb_weight_updater: random words, spike times, deltas and learning rates
// (including extremes that saturate); checks every lane against
// W + floor(delta*lr / 4096) when pre < post, saturated to 12 bits, and W
// unchanged otherwise.
module tb_weight_updater;
  import snn_pkg::*;
  logic [47:0] rdata [10]; stime_t pre_t [4]; stime_t post_t [10]; delta_t delta [10];
  logic [9:0] lr; logic [47:0] wdata [10];
  int checks = 0, failures = 0, n_sat = 0, n_gate = 0;
  weight_updater dut (.rdata, .pre_t, .post_t, .delta, .lr, .wdata);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int r = 0; r < 1000; r++) begin
      lr = (r % 10 == 0) ? 10'd1023 : 10'($urandom);
      foreach (pre_t[m]) pre_t[m] = 4'($urandom);
      for (int n = 0; n < 10; n++) begin
        rdata[n] = {$urandom, $urandom} & 48'hFFFF_FFFF_FFFF;
        if (r % 7 == 0) rdata[n][11:0] = ($urandom_range(0, 1)) ? 12'h7F0 : 12'h810;
        post_t[n] = 4'($urandom);
        delta[n] = (r % 10 == 0) ? (($urandom_range(0,1)) ? 10'sd511 : -10'sd511) : 10'($urandom);
      end
      #1;
      for (int n = 0; n < 10; n++) for (int m = 0; m < 4; m++) begin
        automatic int w = int'($signed(rdata[n][12*m +: 12]));
        automatic int dw = (int'(delta[n]) * int'(lr)) >>> 12;
        automatic int e = w;
        if (pre_t[m] < post_t[n]) begin
          e = w + dw;
          if (e > 2047) begin e = 2047; n_sat++; end
          if (e < -2048) begin e = -2048; n_sat++; end
        end else n_gate++;
        checks++;
        if (int'($signed(wdata[n][12*m +: 12])) != e) begin failures++; if (failures < 10) $display("FAIL n=%0d m=%0d w=%0d dw=%0d got %0d", n, m, w, dw, $signed(wdata[n][12*m +: 12])); end
      end
    end
    checks++; if (n_sat == 0 || n_gate == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
