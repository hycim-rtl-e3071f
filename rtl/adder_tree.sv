// adder_tree -- adds N unsigned IW-bit inputs into an OW-bit sum through a
// binary tree of adders (combinational). Used for the match-line discharge
// count of the filter arrays and the sum over the crossbar subarrays.
// The tree is laid out as a heap: node k adds nodes 2k and 2k+1, the inputs are
// nodes N..2N-1 and the sum is node 1, so the depth is ceil(log2 N) adders
// instead of a chain of N.
module adder_tree #(
  parameter int unsigned N  = 8,
  parameter int unsigned IW = 4,
  parameter int unsigned OW = IW + $clog2(N)
) (
  input  logic [IW-1:0] in [N],
  output logic [OW-1:0] sum
);

  logic [OW-1:0] node [1:2*N-1];

  always_comb begin
    for (int k = 0; k < N; k++) node[N + k] = OW'(in[k]);
    for (int k = N - 1; k >= 1; k--) node[k] = node[2 * k] + node[2 * k + 1];
  end

  if (N == 1) begin : g_one
    assign sum = OW'(in[0]);
  end else begin : g_many
    assign sum = node[1];
  end

endmodule
