// spike_splitter: splits a 16-bit spike-time word and detects live spikes.
//
// A layer receives its presynaptic spike times four at a time as one 16-bit
// word (four 4-bit timestamps, lane m = bits 4m+3:4m). The splitter cuts the
// word into its four times and, following the Universal Time Coding rule that
// a timestamp is only acted on when it equals the current time step, raises
// `match[m]` when lane m's time equals `now` and the word is valid.
// Purely combinational. The split is the paper's; placing the time compare
// here rather than in the weight selection is this design's choice.
module spike_splitter
  import snn_pkg::*;
(
  input  logic [SWORD_W-1:0] word,
  input  stime_t             now,
  input  logic               valid,
  output stime_t             times [LANES],
  output logic [LANES-1:0]   match
);

  always_comb begin
    for (int m = 0; m < LANES; m++) begin
      times[m] = word[m*T_BITS +: T_BITS];
      match[m] = valid && (times[m] == now);
    end
  end

endmodule
