// onesa_accum_tree: the multi-layer accumulator of a PE.
//
// A balanced binary adder tree over the N products of the PE's multipliers.
// Its first layer adds neighbouring products (prod[2l] + prod[2l+1]); in MHP
// mode these pair sums are the results y = k*x + 1*b, one per lane, and are
// taken straight from the first layer. The last layer gives the sum of all N
// products, the dot-product step of GEMM mode. Purely combinational. N must
// be a power of two. The pairing of neighbours follows the paper's
// data-rearrange figure; building the tree as a balanced binary tree is this
// design's choice.
module onesa_accum_tree #(
  parameter int unsigned N = 16,
  parameter int unsigned W = 40
) (
  input  logic signed [W-1:0] prod  [N],
  output logic signed [W-1:0] pair  [N/2],
  output logic signed [W-1:0] total
);
  localparam int unsigned LEVELS = $clog2(N);

  // node[l][i]: sum at tree level l (level 0 = products)
  logic signed [W-1:0] node [LEVELS+1][N];

  always_comb begin
    for (int l = 0; l <= LEVELS; l++)
      for (int i = 0; i < N; i++)
        node[l][i] = '0;
    for (int i = 0; i < N; i++)
      node[0][i] = prod[i];
    for (int l = 1; l <= LEVELS; l++)
      for (int i = 0; i < (N >> l); i++)
        node[l][i] = node[l-1][2*i] + node[l-1][2*i+1];
    for (int i = 0; i < N/2; i++)
      pair[i] = node[1][i];
    total = node[LEVELS][0];
  end

endmodule
