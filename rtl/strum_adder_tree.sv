// strum_adder_tree: sums the lane products of a PE.
//
// N signed inputs are added pairwise in log2(N) levels (a balanced binary
// tree stored heap-style: node n is the sum of nodes 2n and 2n+1, inputs are
// the leaves N..2N-1, node 1 is the result). The result is wide enough that
// it never overflows. N must be a power of two. Combinational.
//
// From the paper: the PE's adder tree that sums the eight products before
// they are accumulated into the OF RF (Fig. 8(b), Fig. 7 "N-input Adder
// Tree"). This design's choice: widths and the heap layout.
module strum_adder_tree #(
  parameter int unsigned N  = 8,
  parameter int unsigned IW = 16,
  parameter int unsigned OW = IW + $clog2(N)
) (
  input  logic signed [N-1:0][IW-1:0] in,
  output logic signed [OW-1:0]        sum
);
  logic signed [OW-1:0] node [2*N];

  always_comb begin
    node[0] = '0;
    for (int j = 0; j < int'(N); j++) node[N + j] = OW'(signed'(in[j]));
    for (int n = int'(N) - 1; n >= 1; n--) node[n] = node[2*n] + node[2*n+1];
    sum = node[1];
  end

  initial begin
    assert ((N & (N - 1)) == 0 && N >= 2) else $error("strum_adder_tree: N must be a power of two");
  end
endmodule
