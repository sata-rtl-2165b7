// dot_product_engine: binary dot product of two mask columns.
//
// dot = popcount(col_i & col_j), i.e. QK[:,i]^T . QK[:,j]: the number of queries
// that attend to both key i and key j. The AND gates feed a binary adder tree
// (as drawn in the paper's scheduler schematic); each level halves the number of
// partial sums, so the depth is ceil(log2 N). Purely combinational: one column
// pair per cycle.
module dot_product_engine #(
  parameter int unsigned N     = 30,
  parameter int unsigned DOT_W = $clog2(N + 1)
) (
  input  logic [N-1:0]     col_i,
  input  logic [N-1:0]     col_j,
  output logic [DOT_W-1:0] dot
);

  localparam int unsigned LEAVES = 1 << $clog2(N);   // leaves padded to a power of two
  localparam int unsigned LEVELS = $clog2(N);

  // tree[l][n]: node n of level l; level 0 holds the AND bits.
  logic [DOT_W-1:0] tree [LEVELS+1][LEAVES];

  always_comb begin
    for (int l = 0; l <= LEVELS; l++)
      for (int n = 0; n < LEAVES; n++)
        tree[l][n] = '0;
    for (int n = 0; n < N; n++)
      tree[0][n] = DOT_W'(col_i[n] & col_j[n]);
    for (int l = 1; l <= LEVELS; l++)
      for (int n = 0; n < (LEAVES >> l); n++)
        tree[l][n] = tree[l-1][2*n] + tree[l-1][2*n+1];
  end

  assign dot = tree[LEVELS][0];

endmodule
