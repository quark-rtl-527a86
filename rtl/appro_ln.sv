// appro_ln: shift-and-add approximation of ln(x) (the "Appro-LN" block).
//
// How it works (paper Eq. 6-9 and Algorithm 1):
//   1. A leading-one detector (LOD) gives the MSB position; qM = msb - IN_F is
//      the integer part of log2(x).
//   2. x is shifted so that qN = x / 2^qM lies in [1, 2) (Q.12).
//   3. log2(qN) ~ -0.3369 qN^2 + 1.995 qN - 1.65, and log2(x) = qM + log2(qN).
//   4. ln(x) = ln2 * log2(x) with ln2 ~ 0.1011b:  l - (l >>> 2) - (l >>> 4).
//
// Interface: x is unsigned with IN_F fractional bits; y is signed with OUT_F
// fractional bits (OUT_F <= 12), truncated.  x = 0 has no logarithm; this
// design returns the most negative y for it (a choice of this design).
// Purely combinational.
module appro_ln
  import quark_pkg::*;
#(
  parameter int IN_W  = ACC_W,
  parameter int IN_F  = 12,
  parameter int OUT_W = LN_W,
  parameter int OUT_F = 12
) (
  input  logic        [IN_W-1:0]  x,
  output logic signed [OUT_W-1:0] y
);

  localparam int PW = 48;

  logic [$clog2(IN_W+1)-1:0] msb;
  logic signed [PW-1:0] qm, qn, lg, l2, ln;

  // leading-one detector
  always_comb begin
    msb = '0;
    for (int i = 0; i < IN_W; i++)
      if (x[i]) msb = ($clog2(IN_W+1))'(i);
  end

  always_comb begin
    qm = PW'(msb) - PW'(IN_F);
    if (int'(msb) >= CF) qn = PW'(x >> (int'(msb) - CF));
    else                 qn = PW'(x) << (CF - int'(msb));
    lg = -((PW'(LOG_C2) * qn * qn) >>> (2 * CF))
         + ((PW'(LOG_C1) * qn) >>> CF)
         - PW'(LOG_C0);
    l2 = (qm <<< CF) + lg;
    ln = l2 - (l2 >>> 2) - (l2 >>> 4);
    if (x == '0) y = {1'b1, {(OUT_W-1){1'b0}}};
    else         y = OUT_W'(ln >>> (CF - OUT_F));
  end

endmodule
