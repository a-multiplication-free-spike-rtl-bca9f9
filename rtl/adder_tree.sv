// adder_tree: combinational signed sum of N operands.
//
// Sums N signed IW-bit values into an OW-bit result wide enough not to
// overflow (IW + ceil(log2 N) bits by default). The sum is built level by
// level as a balanced binary tree: level 0 holds the operands, each next
// level adds neighbouring pairs. The forward IF neuron uses N = 4 (the four
// selected weights of one word, as in the paper); the backpropagation unit
// uses the same module with N = number of upstream neurons.
module adder_tree #(
  parameter int N  = 4,
  parameter int IW = 12,
  parameter int OW = IW + ((N > 1) ? $clog2(N) : 1)
) (
  input  logic signed [IW-1:0] in  [N],
  output logic signed [OW-1:0] sum
);

  localparam int LEVELS = (N > 1) ? $clog2(N) : 1;
  localparam int P2     = 2 ** LEVELS;

  logic signed [OW-1:0] node [LEVELS+1][P2];

  always_comb begin
    for (int i = 0; i < P2; i++)
      node[0][i] = (i < N) ? OW'(in[i]) : '0;
    for (int l = 1; l <= LEVELS; l++)
      for (int i = 0; i < P2; i++)
        node[l][i] = (i < (P2 >> l)) ? node[l-1][2*i] + node[l-1][2*i+1] : '0;
    sum = node[LEVELS][0];
  end

endmodule
