// appro_exp: shift-and-add approximation of exp(x) (the "Appro-Exp" block).
//
// How it works (paper Eq. 3-5 and Algorithm 1):
//   1. x * log2(e) is formed as  xs = x + (x >>> 1) - (x >>> 4)   (log2 e ~ 1.0111b).
//   2. xs is split into qI = ceil(xs) and qF = xs - qI, qF in (-1, 0].
//   3. 2^qF is approximated by 0.1713 qF^2 + 0.6674 qF + 0.998 in Q.12.
//   4. The result is 2^qF shifted by qI (left for qI > 0, right for qI < 0).
// The text's coefficients (0.6674, 0.998) are used; the figure's inset prints
// 0.6647 and 1.  Negative and positive exponents are both accepted so the same
// block serves the Softmax (x <= 0) and the log-domain divider (any sign).
//
// Interface: x is signed with IN_F fractional bits (IN_F <= 12); y is unsigned
// with OUT_F fractional bits, truncated on right shifts and saturated to all
// ones on overflow.  Purely combinational, no clock.
module appro_exp
  import quark_pkg::*;
#(
  parameter int IN_W  = 24,
  parameter int IN_F  = 12,
  parameter int OUT_W = 16,
  parameter int OUT_F = 8
) (
  input  logic signed [IN_W-1:0]  x,
  output logic        [OUT_W-1:0] y
);

  localparam int XW = IN_W + 2;
  localparam int PW = 48;
  localparam int YW = OUT_W + CF + 2;

  logic signed [XW-1:0] xe, xs, qi, qf;
  logic signed [PW-1:0] qfc, poly;
  logic signed [XW-1:0] sh;
  logic        [YW-1:0] wide;

  always_comb begin
    xe   = XW'(x);
    xs   = xe + (xe >>> 1) - (xe >>> 4);
    // ceiling of xs: add (1 - ulp) then floor by arithmetic shift
    qi   = (xs + XW'((1 << IN_F) - 1)) >>> IN_F;
    qf   = xs - (qi <<< IN_F);
    qfc  = PW'(qf) <<< (CF - IN_F);
    poly = ((PW'(EXP_C2) * qfc * qfc) >>> (2 * CF))
         + ((PW'(EXP_C1) * qfc) >>> CF)
         + PW'(EXP_C0);
    // net shift applied to the Q.12 polynomial to land in Q.OUT_F
    sh   = qi + XW'(OUT_F) - XW'(CF);
    wide = '0;
    y    = '0;
    if (sh >= 0) begin
      if (sh > XW'(OUT_W)) begin
        y = '1;
      end else begin
        wide = YW'(poly) << sh;
        if (wide > YW'({OUT_W{1'b1}})) y = '1;
        else                           y = wide[OUT_W-1:0];
      end
    end else begin
      if (-sh > XW'(CF + 1)) y = '0;
      else                   y = OUT_W'(poly >>> (-sh));
    end
  end

endmodule
