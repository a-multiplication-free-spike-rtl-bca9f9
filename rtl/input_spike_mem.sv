// input_spike_mem: memory-mapped store of one latency-coded input sample.
//
// The host writes the input spike times (already latency coded off-chip,
// t = 15 - pixel for 4-bit pixels) as N_IN/4 words of 16 bits; lane m of
// word a (bits 4m+3:4m) is input 4a+m. During the forward sweep of the first
// hidden layer the controller reads one word per cycle; the read is
// synchronous, so the word appears one clock after `raddr`, aligned with the
// weight BRAM words it is paired with. Word width and depth are the paper's
// (64 x 4-bit spike times); the plain write port is this design's choice.
module input_spike_mem
  import snn_pkg::*;
#(
  parameter int N_IN  = 64,
  localparam int WORDS = (N_IN + LANES - 1) / LANES,
  localparam int AW    = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic               clk,
  input  logic               we,
  input  logic [AW-1:0]      waddr,
  input  logic [SWORD_W-1:0] wdata,
  input  logic [AW-1:0]      raddr,
  output logic [SWORD_W-1:0] rdata
);

  logic [SWORD_W-1:0] mem [WORDS];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
