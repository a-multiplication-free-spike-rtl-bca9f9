// digital_timer: the shared 4-bit time-step counter.
//
// One counter gives the current time step to every layer in the forward
// pass and the current backward time step in the backward pass, as the paper
// shares a single "digital timer" between both passes. It counts
// 0 .. T_STEPS-1 and then wraps to 0. The paper simulates times 0..14 and
// gives neurons that never fired the virtual time 15, so T_STEPS defaults to
// 15 (the paper's throughput figure, 315 cycles per sample for a 21-cycle
// sweep, implies 15 steps).
//
// Interface: `clear` forces 0, `inc` advances by one at the clock edge
// (clear wins). `now` is the current step and `last` is high while
// now == T_STEPS-1. In this design the counter advances once per sweep of a
// layer (several clocks), which is this design's reading of "increments ...
// in single clock cycle steps".
module digital_timer
  import snn_pkg::*;
#(
  parameter int T_STEPS = TMAX
) (
  input  logic   clk,
  input  logic   rst_n,
  input  logic   clear,
  input  logic   inc,
  output stime_t now,
  output logic   last
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                now <= '0;
    else if (clear)            now <= '0;
    else if (inc) now <= last ? '0 : now + 1'b1;
  end

  assign last = (now == stime_t'(T_STEPS - 1));

endmodule
