// tb_threshold_comparator: random potentials and thresholds in both modes,
// with values on and next to the thresholds; checks fire and sign against
// Eq. 5 (v >= theta) and Eq. 16 (v > theta / v < -theta), and that a neuron
// that has fired never fires again.
module tb_threshold_comparator;
  import snn_pkg::*;
  logic signed [17:0] v; weight_t theta; logic bipolar, fired, fire, neg;
  int checks = 0, failures = 0;
  threshold_comparator dut (.v, .theta, .bipolar, .fired, .fire, .neg);
  initial begin
    #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int r = 0; r < 3000; r++) begin
      automatic int th = $urandom_range(0, 2047), vv, ef, en;
      case (r % 5)
        0: vv = th; 1: vv = -th; 2: vv = th + 1; 3: vv = -th - 1;
        default: vv = $urandom_range(0, 8191) - 4096;
      endcase
      theta = 12'(th); v = 18'(vv); bipolar = $urandom_range(0, 1); fired = ($urandom_range(0, 3) == 0);
      #1;
      if (fired) begin ef = 0; en = 0; end
      else if (!bipolar) begin ef = vv >= th; en = 0; end
      else begin ef = (vv > th) || (vv < -th); en = vv < -th; end
      checks++;
      if (fire != ef || (ef && neg != en)) begin failures++; if (failures < 10) $display("FAIL v=%0d th=%0d b=%0d", vv, th, bipolar); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
