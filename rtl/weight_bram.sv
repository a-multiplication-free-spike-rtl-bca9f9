// weight_bram: one neuron's synaptic weight memory.
//
// Each neuron owns a memory of DEPTH words of 48 bits; a word packs four
// 12-bit Q5.7 weights (lane m = bits 12m+11:12m = input 4a+m of word a), so
// one read returns four weights. The memory is simple dual-port: a
// synchronous read port (data one clock after `raddr`) and a write port,
// which lets a weight update read word a while writing back word a-1. When
// both ports use the same address in one cycle the read returns the old
// word. Word format follows the paper; the dual-port organisation is this
// design's choice. Contents are not reset: the host loads them.
module weight_bram
  import snn_pkg::*;
#(
  parameter int DEPTH = 16,
  parameter int WIDTH = WORD_W,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
