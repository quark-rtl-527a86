// group_quant_unit: reorder-based group quantization of the nonlinear outputs
// (paper Sec. III-C, Sec. IV-B and the Group Quantization Unit figure).
//
// Three stages, as in the figure:
//   Allocate Quantization Scale  S = 2^s from the calibrated Max and Min and
//       the bit width: s = ceil(log2(Max - Min)) - bits (at least 0), i.e. the
//       "Shift" of (Max - Min) by the quantization bits, rounded up to a power
//       of two so that every later step is a shift.  Group g uses
//       S_g = 2^alpha_g * S (Eq. 25).
//   Intra-group Quantization  q_i = Clip(Round(x_i / S_g), 0, 2^bits - 1),
//       the division being a rounding right shift by s + alpha_g.
//   Cross-group Alignment  each q_i is shifted back left by alpha_g, all lanes
//       are summed and the sum is multiplied by S (Eq. 26-27):
//       x_int = S * sum_i (q_i << alpha_g(i)).
// Channels were reordered offline so that a group is a set of lanes; which
// group each lane belongs to is given by lane_grp (configuration).  Max, Min,
// bits and alpha come from offline calibration.  The power-of-two S, the
// unsigned clip range of the figure (negative inputs clip to 0) and the
// widths are choices of this design; the text's Eq. 23 describes a signed
// clamp instead.
//
// Interface: in_valid with x (Q8.8 LSBs as the unit of S); one cycle later
// out_valid with q (per lane), x_int and s.  No back-pressure.
module group_quant_unit
  import quark_pkg::*;
#(
  parameter int N  = 384,
  parameter int NG = 4,
  parameter int QW = 8
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          in_valid,
  input  logic signed [DATA_W-1:0]      x [N],
  input  logic [N-1:0]                  lane_en,
  input  logic signed [DATA_W-1:0]      qmax,
  input  logic signed [DATA_W-1:0]      qmin,
  input  logic [3:0]                    qbits,
  input  logic [$clog2(NG)-1:0]         lane_grp [N],
  input  logic [3:0]                    alpha [NG],
  output logic                          out_valid,
  output logic [QW-1:0]                 q [N],
  output logic signed [ACC_W-1:0]       x_int,
  output logic [4:0]                    s
);

  localparam int RW = DATA_W + 1;

  logic [RW-1:0]          range_v;
  logic [4:0]             msb, clog, s_c;
  logic [QW-1:0]          qc   [N];
  logic [QW+15:0]         al   [N];
  logic [ACC_W-1:0]       asum;
  logic [QW:0]            qlim;

  // Allocate Quantization Scale
  always_comb begin
    range_v = (qmax > qmin) ? RW'(qmax) - RW'(qmin) : RW'(1);
    msb = '0;
    for (int b = 0; b < RW; b++)
      if (range_v[b]) msb = 5'(b);
    clog = ((range_v & (range_v - 1'b1)) == '0) ? msb : msb + 5'd1;
    s_c  = (clog > 5'(qbits)) ? clog - 5'(qbits) : '0;
    qlim = ((QW+1)'(1) << qbits) - 1'b1;
  end

  // Intra-group Quantization and Cross-group Alignment
  always_comb begin
    logic [5:0]                sh;
    logic signed [DATA_W+1:0]  r;
    asum = '0;
    for (int i = 0; i < N; i++) begin
      sh = 6'(s_c) + 6'(alpha[lane_grp[i]]);
      r  = (DATA_W+2)'(x[i]);
      if (sh != 0) r = (r + ((DATA_W+2)'(1) <<< (sh - 1))) >>> sh;
      if (!lane_en[i] || r <= 0)         qc[i] = '0;
      else if (r >= (DATA_W+2)'(qlim))   qc[i] = QW'(qlim);
      else                               qc[i] = QW'(r);
      al[i] = (QW+16)'(qc[i]) << alpha[lane_grp[i]];
      asum  = asum + ACC_W'(al[i]);
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      x_int     <= '0;
      s         <= '0;
      for (int i = 0; i < N; i++) q[i] <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) begin
        for (int i = 0; i < N; i++) q[i] <= qc[i];
        x_int <= ACC_W'(asum * (ACC_W'(1) << s_c));
        s     <= s_c;
      end
    end
  end

endmodule
