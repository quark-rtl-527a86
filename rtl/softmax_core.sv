// softmax_core: the shared Softmax datapath of the sub-operator sharing unit.
//
// One datapath serves three modes (paper Sec. IV-A and the centre column of
// the shared-unit figure), chosen by `mode`:
//   MODE_SOFTMAX  y_i = exp((x_i - max) - ln(sum_j exp(x_j - max)))   (Eq. 2)
//   MODE_GELU     lanes (2k, 2k+1) form independent binary Softmaxes; y_2k is
//                 the first output of Softmax([x_2k, x_2k+1]).  gelu_pre feeds
//                 [0, -1.702 x] so that y_2k = sigmoid(1.702 x)   (Eq. 12)
//   MODE_LN       y_i = sum_j x_j / n, the LayerNorm mean, by log division
//                 exp(ln|sum x| - ln n) with the sign restored (all lanes equal)
// Stages, in the figure's order: MaxComparatorTree -> N/2 MUX (global max, or
// per-pair max in GELU mode) -> Parallel-Subtractor -> Appro-Exp row -> N MUX
// (exp values, or raw x in LN mode) -> AdderTree -> (N/2-1+1) Appro-LN (the
// root sum, or the N/2 first-level pair sums in GELU mode) -> N/2 MUX ->
// Parallel-Subtractor (x_i - max - ln sum, or ln sum - ln n) -> Appro-Exp row.
//
// Interface: x is Q8.8 (DATA_W/FRAC), lane_en masks lanes outside the row
// (Softmax and LN); ln_n is ln(number of valid lanes) in Q.12, used in LN mode.
// y is Q8.8; masked lanes give 0 in Softmax mode.  Combinational; the caller
// registers the result.  Exp values between the rows are kept in Q.12.
module softmax_core
  import quark_pkg::*;
#(
  parameter int N = 384
) (
  input  mode_e                    mode,
  input  logic signed [DATA_W-1:0] x [N],
  input  logic [N-1:0]             lane_en,
  input  logic signed [LN_W-1:0]   ln_n,
  output logic signed [DATA_W-1:0] y [N]
);

  localparam int EW = CF + 2;          // exp of a non-positive number, Q.12
  localparam int TW = DATA_W + CF - FRAC + 1;
  localparam int ZW = LN_W + 2;

  logic signed [DATA_W-1:0] gmax;
  logic signed [DATA_W-1:0] msel  [N];
  logic signed [DATA_W:0]   d     [N];
  logic        [EW-1:0]     e     [N];
  logic signed [TW-1:0]     t     [N];
  logic signed [ACC_W-1:0]  psum  [N/2];
  logic signed [ACC_W-1:0]  tsum;
  logic        [ACC_W-1:0]  lnin  [N/2];
  logic signed [LN_W-1:0]   lnv   [N/2];
  logic signed [ZW-1:0]     z     [N];
  logic        [DATA_W-2:0] eo    [N];

  max_tree #(.N(N), .W(DATA_W)) u_max (.x(x), .lane_en(lane_en), .y(gmax));

  for (genvar i = 0; i < N; i++) begin : g_lane
    localparam int P = i ^ 1;          // partner lane of the binary Softmax
    // N/2 MUX (0: Softmax, 1: GELU) on the maximum
    assign msel[i] = (mode == MODE_GELU) ? ((x[i] >= x[P]) ? x[i] : x[P]) : gmax;
    // Parallel-Subtractor
    assign d[i] = (DATA_W+1)'(x[i]) - (DATA_W+1)'(msel[i]);
    appro_exp #(.IN_W(DATA_W+1), .IN_F(FRAC), .OUT_W(EW), .OUT_F(CF)) u_exp1 (.x(d[i]), .y(e[i]));
    // N MUX (0: Softmax, 1: LN)
    always_comb begin
      if (mode == MODE_LN)
        t[i] = lane_en[i] ? (TW'(x[i]) <<< (CF - FRAC)) : '0;
      else if (mode == MODE_GELU || lane_en[i])
        t[i] = TW'(e[i]);
      else
        t[i] = '0;
    end
  end

  adder_tree #(.N(N), .W(TW), .OW(ACC_W)) u_add (.x(t), .pair(psum), .sum(tsum));

  // (N/2 - 1 + 1) Appro-LN: unit 0 takes the root sum outside GELU mode
  for (genvar k = 0; k < N/2; k++) begin : g_ln
    always_comb begin
      if (k == 0 && mode != MODE_GELU)
        lnin[k] = (tsum < 0) ? ACC_W'(-tsum) : ACC_W'(tsum);
      else
        lnin[k] = ACC_W'(psum[k]);
    end
    appro_ln #(.IN_W(ACC_W), .IN_F(CF), .OUT_W(LN_W), .OUT_F(CF)) u_ln (.x(lnin[k]), .y(lnv[k]));
  end

  for (genvar i = 0; i < N; i++) begin : g_out
    // N/2 MUX on the logarithm, then the second Parallel-Subtractor
    always_comb begin
      if (mode == MODE_LN)
        z[i] = ZW'(lnv[0]) - ZW'(ln_n);
      else if (mode == MODE_GELU)
        z[i] = (ZW'(d[i]) <<< (CF - FRAC)) - ZW'(lnv[i/2]);
      else
        z[i] = (ZW'(d[i]) <<< (CF - FRAC)) - ZW'(lnv[0]);
    end
    appro_exp #(.IN_W(ZW), .IN_F(CF), .OUT_W(DATA_W-1), .OUT_F(FRAC)) u_exp2 (.x(z[i]), .y(eo[i]));
    always_comb begin
      if (mode == MODE_LN)
        y[i] = (tsum == 0) ? '0 : (tsum < 0) ? -DATA_W'(eo[i]) : DATA_W'(eo[i]);
      else if (mode == MODE_SOFTMAX && !lane_en[i])
        y[i] = '0;
      else
        y[i] = DATA_W'(eo[i]);
    end
  end

endmodule
