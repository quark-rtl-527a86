// log_divider: division without a divider (the "Log-Devider" block).
//
// a / b = exp(ln a - ln b): both operands go through appro_ln, the logarithms
// are subtracted and the difference goes through appro_exp (paper Eq. 18 and
// the Log-Devider inset of the shared-unit figure).  The error is that of the
// two approximations, a few percent.
//
// Interface: a and b are unsigned with F fractional bits (the same F for
// both); q = a / b is unsigned with OUT_F fractional bits, saturated.  a = 0
// gives 0 and b = 0 gives all ones (choices of this design).  Combinational.
module log_divider
  import quark_pkg::*;
#(
  parameter int W     = ACC_W,
  parameter int F     = 12,
  parameter int OUT_W = DATA_W,
  parameter int OUT_F = FRAC
) (
  input  logic [W-1:0]     a,
  input  logic [W-1:0]     b,
  output logic [OUT_W-1:0] q
);

  logic signed [LN_W-1:0] ln_a, ln_b;
  logic signed [LN_W:0]   diff;
  logic        [OUT_W-1:0] e;

  appro_ln #(.IN_W(W), .IN_F(F), .OUT_W(LN_W), .OUT_F(CF)) u_ln_a (.x(a), .y(ln_a));
  appro_ln #(.IN_W(W), .IN_F(F), .OUT_W(LN_W), .OUT_F(CF)) u_ln_b (.x(b), .y(ln_b));

  assign diff = (LN_W+1)'(ln_a) - (LN_W+1)'(ln_b);

  appro_exp #(.IN_W(LN_W+1), .IN_F(CF), .OUT_W(OUT_W), .OUT_F(OUT_F)) u_exp (.x(diff), .y(e));

  always_comb begin
    if (a == '0)      q = '0;
    else if (b == '0) q = '1;
    else              q = e;
  end

endmodule
