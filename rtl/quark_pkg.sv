// quark_pkg: fixed-point formats, approximation coefficients and the operating
// mode shared by every block of the QUARK nonlinear unit.
//
// Number formats (all two's complement unless noted):
//   * vector data at the unit's boundary: DATA_W = 16 bits, FRAC = 8 fractional
//     bits (Q8.8).  An INT8 activation with a power-of-two scale is placed in
//     this format by a shift.  The bit widths are this design's choice.
//   * polynomial arithmetic and logarithms inside the unit: CF = 12 fractional
//     bits (Q.12).
//   * accumulators (adder trees): ACC_W = 40 bits.
//
// Coefficients are the paper's decimal constants rounded to Q.12:
//   2^qF     ~ 0.1713 qF^2 + 0.6674 qF + 0.998     (exp fraction, text Eq. 5)
//   log2(qN) ~ -0.3369 qN^2 + 1.995 qN - 1.65       (log mantissa, Eq. 9)
//   1.702 (GELU sigmoid slope, Eq. 11) in Q.8.
//   2.4   (ReLU interval bound) rounded up to the Q8.8 grid.
package quark_pkg;

  localparam int DATA_W = 16;   // vector element width (Q8.8)
  localparam int FRAC   = 8;    // fractional bits of vector data
  localparam int CF     = 12;   // fractional bits of polynomial/log arithmetic
  localparam int ACC_W  = 40;   // adder-tree accumulator width
  localparam int LN_W   = 24;   // width of a logarithm in Q.12

  // exp fraction polynomial, Q.12
  localparam int signed EXP_C2 = 702;    // round(0.1713 * 4096)
  localparam int signed EXP_C1 = 2734;   // round(0.6674 * 4096)
  localparam int signed EXP_C0 = 4088;   // round(0.998  * 4096)

  // log2 mantissa polynomial, Q.12
  localparam int signed LOG_C2 = 1380;   // round(0.3369 * 4096), subtracted
  localparam int signed LOG_C1 = 8172;   // round(1.995  * 4096)
  localparam int signed LOG_C0 = 6758;   // round(1.65   * 4096), subtracted

  // GELU constants, Q8.8
  localparam int signed GELU_K      = 436;  // round(1.702 * 256)
  localparam int signed GELU_RELU_T = 615;  // ceil(2.4 * 256): |x| >= 2.4 uses ReLU

  // operating mode of the shared unit (time-division multiplexed)
  typedef enum logic [1:0] {
    MODE_SOFTMAX = 2'd0,
    MODE_GELU    = 2'd1,
    MODE_LN      = 2'd2
  } mode_e;

endpackage
