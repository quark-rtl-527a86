// max_tree: signed maximum of N lanes (the "MaxComparatorTree" block).
//
// A balanced binary tree of two-input comparators; lanes whose bit in
// lane_en is 0 are replaced by the most negative value so that they never
// win.  The lane mask lets one tree serve rows shorter than N (this design's
// choice).  Combinational; depth ceil(log2 N) comparators.
module max_tree #(
  parameter int N = 384,
  parameter int W = 16
) (
  input  logic signed [W-1:0] x [N],
  input  logic [N-1:0]        lane_en,
  output logic signed [W-1:0] y
);

  localparam int LEVELS = (N > 1) ? $clog2(N) : 1;
  localparam int P      = 1 << LEVELS;
  localparam logic signed [W-1:0] MINV = {1'b1, {(W-1){1'b0}}};

  logic signed [W-1:0] node [LEVELS+1][P];

  always_comb begin
    for (int i = 0; i < P; i++)
      node[0][i] = (i < N && lane_en[i % N]) ? x[i % N] : MINV;
    for (int l = 1; l <= LEVELS; l++)
      for (int i = 0; i < P; i++)
        if (i < (P >> l))
          node[l][i] = (node[l-1][2*i] >= node[l-1][2*i+1]) ? node[l-1][2*i] : node[l-1][2*i+1];
        else
          node[l][i] = MINV;
    y = node[LEVELS][0];
  end

endmodule
