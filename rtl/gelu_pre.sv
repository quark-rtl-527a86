// gelu_pre: input stage of GELU mode ("Parallel-Multiplier(-1.702)").
//
// GELU(x) ~ x * sigmoid(1.702 x) and sigmoid(1.702 x) is the first output of
// Softmax([0, -1.702 x]) (paper Eq. 11-13).  For each GELU input x_k, k < N/2,
// this stage writes the pair c_2k = 0, c_2k+1 = -1.702 x_k into the lanes of
// the shared Softmax datapath.  1.702 is the Q8.8 constant 436/256; the
// product is truncated and saturated to DATA_W bits (saturation only happens
// for |x| > 75, where the ReLU branch is used anyway).  Combinational.
module gelu_pre
  import quark_pkg::*;
#(
  parameter int N = 384
) (
  input  logic signed [DATA_W-1:0] x [N],
  output logic signed [DATA_W-1:0] c [N]
);

  localparam int PW = DATA_W + 12;
  localparam logic signed [PW-1:0] MAXV = PW'({1'b0, {(DATA_W-1){1'b1}}});
  localparam logic signed [PW-1:0] MINV = -MAXV - 1;

  logic signed [PW-1:0] p [N/2];

  always_comb begin
    for (int k = 0; k < N/2; k++) begin
      p[k] = -((PW'(x[k]) * PW'(GELU_K)) >>> FRAC);
      c[2*k] = '0;
      if (p[k] > MAXV)      c[2*k+1] = MAXV[DATA_W-1:0];
      else if (p[k] < MINV) c[2*k+1] = MINV[DATA_W-1:0];
      else                  c[2*k+1] = p[k][DATA_W-1:0];
    end
  end

endmodule
