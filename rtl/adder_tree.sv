// adder_tree: signed sum of N lanes (the "AdderTree" / "Adder-Tree" blocks).
//
// A balanced binary tree of adders.  Besides the full sum it exposes the N/2
// sums of the first level (lanes 2k and 2k+1); in GELU mode the shared unit
// takes each binary-Softmax denominator from there.  Inputs are sign-extended
// to the accumulator width OW.  N must be even.  Combinational.
module adder_tree #(
  parameter int N  = 384,
  parameter int W  = 16,
  parameter int OW = 40
) (
  input  logic signed [W-1:0]  x    [N],
  output logic signed [OW-1:0] pair [N/2],
  output logic signed [OW-1:0] sum
);

  localparam int LEVELS = (N > 1) ? $clog2(N) : 1;
  localparam int P      = 1 << LEVELS;

  logic signed [OW-1:0] node [LEVELS+1][P];

  always_comb begin
    for (int i = 0; i < P; i++)
      node[0][i] = (i < N) ? OW'(x[i % N]) : '0;
    for (int l = 1; l <= LEVELS; l++)
      for (int i = 0; i < P; i++)
        node[l][i] = (i < (P >> l)) ? node[l-1][2*i] + node[l-1][2*i+1] : '0;
    for (int k = 0; k < N/2; k++)
      pair[k] = node[1][k];
    sum = node[LEVELS][0];
  end

endmodule
