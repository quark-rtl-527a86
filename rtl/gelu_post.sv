// gelu_post: output stage of GELU mode ("Parallel-Multiplier", "ReLU" and the
// "N/2 MUX" of the GELU column).
//
// For each GELU input x_k (k < N/2) the shared Softmax datapath has returned
// s_2k = sigmoid(1.702 x_k) in Q8.8.  The stage forms x_k * s_2k (Eq. 13 as
// drawn in the figure, x * Softmax([0, -1.702 x])) and, where |x_k| >= 2.4,
// selects ReLU(x_k) = (x_k > 0) ? x_k : 0 instead (Eq. 14 and the ReLU
// interval (-inf, -2.4] U [2.4, inf)).  Lanes k >= n and k >= N/2 give 0.
// Combinational.
module gelu_post
  import quark_pkg::*;
#(
  parameter int N = 384
) (
  input  logic signed [DATA_W-1:0]  x [N],
  input  logic signed [DATA_W-1:0]  s [N],
  input  logic [$clog2(N+1)-1:0]    n,
  output logic signed [DATA_W-1:0]  g [N],
  output logic [N/2-1:0]            relu_sel
);

  localparam int PW = 2 * DATA_W;

  logic signed [DATA_W-1:0] prod;
  logic signed [DATA_W-1:0] relu;

  always_comb begin
    prod = '0;
    relu = '0;
    for (int i = 0; i < N; i++) g[i] = '0;
    for (int k = 0; k < N/2; k++) begin
      relu_sel[k] = (x[k] >= DATA_W'(GELU_RELU_T)) || (x[k] <= -DATA_W'(GELU_RELU_T));
      prod = DATA_W'((PW'(x[k]) * PW'(s[2*k])) >>> FRAC);
      relu = (x[k] > 0) ? x[k] : '0;
      if (k >= int'(n))     g[k] = '0;
      else if (relu_sel[k]) g[k] = relu;
      else                  g[k] = prod;
    end
  end

endmodule
