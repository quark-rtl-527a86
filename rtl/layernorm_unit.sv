// layernorm_unit: the LayerNorm-specific part of the shared unit (right-hand
// column "LayerNorm" of the shared-unit figure).
//
// The mean comes from the shared Softmax datapath in LN mode.  This block then
// computes, without a divider (paper Eq. 15-18):
//   E(x^2)  = exp(ln(sum x_i^2) - ln n)         squares, Adder-Tree, Log-Devider
//   Var     = E(x^2) - mean^2                   single-pass variance, Eq. 16
//   std     = sqrt(Var)                         newton_sqrt
//   y_i     = (x_i - mean) / std                Parallel-Subtractor and a
//             = sign * exp(ln|x_i - mean| - ln std)   per-lane Log-Devider
// ln std is formed once and shared by all lanes.  The per-lane squarers are
// this design's (the figure does not draw how x^2 is formed).  The affine
// gamma/beta of the figure's formula is not applied here: it is a per-channel
// scale and bias that can be folded into the following quantizer or layer.
//
// Interface: start (one cycle) with x, lane_en, ln_n (ln of the number of
// valid lanes, Q.12) and mean (Q8.8) stable until done.  done pulses for one
// cycle with y (Q8.8) valid until the next start.  Latency: 1 cycle for the
// variance, iters + 1 cycles of square root, 1 cycle for the output.
// Lanes outside lane_en and rows with zero variance give 0.
module layernorm_unit
  import quark_pkg::*;
#(
  parameter int N = 384
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     start,
  input  logic signed [DATA_W-1:0] x [N],
  input  logic [N-1:0]             lane_en,
  input  logic signed [LN_W-1:0]   ln_n,
  input  logic signed [DATA_W-1:0] mean,
  output logic                     busy,
  output logic                     done,
  output logic signed [DATA_W-1:0] y [N],
  output logic [DATA_W+7:0]        var_o,
  output logic [3:0]               sqrt_iters
);

  localparam int VW = DATA_W + 8;        // variance, Q.8 (up to 2^15 real)
  localparam int SW = 2 * DATA_W;        // x^2, Q.16
  localparam int ZW = LN_W + 1;

  typedef enum logic [1:0] {S_IDLE, S_SQRT, S_OUT} state_e;
  state_e state;

  logic signed [SW-1:0]     sq   [N];
  logic signed [ACC_W-1:0]  sumsq;
  logic signed [LN_W-1:0]   ln_sumsq, ln_std;
  logic signed [ZW-1:0]     z_ex2;
  logic        [VW-1:0]     ex2, mean2, var_c, var_r, std_r, root;
  logic signed [SW-1:0]     msq;
  logic                     sqrt_start, sqrt_done, sqrt_busy;
  logic [3:0]               iters;

  // Squarers and Adder-Tree: sum of x^2 over the row (Q.16)
  always_comb
    for (int i = 0; i < N; i++)
      sq[i] = lane_en[i] ? SW'(x[i]) * SW'(x[i]) : '0;

  adder_tree #(.N(N), .W(SW), .OW(ACC_W)) u_sq_tree (.x(sq), .pair(), .sum(sumsq));

  // Log-Devider with ln N: E(x^2) = exp(ln sumsq - ln n), Q.8
  appro_ln  #(.IN_W(ACC_W), .IN_F(2*FRAC), .OUT_W(LN_W), .OUT_F(CF)) u_ln_sq (.x(ACC_W'(sumsq)), .y(ln_sumsq));
  assign z_ex2 = ZW'(ln_sumsq) - ZW'(ln_n);
  appro_exp #(.IN_W(ZW), .IN_F(CF), .OUT_W(VW), .OUT_F(FRAC)) u_ex2 (.x(z_ex2), .y(ex2));

  // mean^2 and the subtraction of the figure (x and - nodes)
  always_comb begin
    msq   = SW'(mean) * SW'(mean);
    mean2 = VW'(msq >>> FRAC);
    var_c = (sumsq == 0 || ex2 <= mean2) ? '0 : ex2 - mean2;
  end

  newton_sqrt #(.VW(VW), .F(FRAC), .MAX_ITER(10)) u_sqrt (
    .clk, .rst_n, .start(sqrt_start), .v(var_r),
    .busy(sqrt_busy), .done(sqrt_done), .root, .iters
  );

  // final Log-Devider: ln std shared by every lane
  appro_ln #(.IN_W(VW), .IN_F(FRAC), .OUT_W(LN_W), .OUT_F(CF)) u_ln_std (.x(std_r), .y(ln_std));

  logic        [VW-1:0]     dabs [N];
  logic signed [DATA_W:0]   dsg  [N];
  logic signed [LN_W-1:0]   ln_d [N];
  logic signed [ZW-1:0]     zq   [N];
  logic        [DATA_W-2:0] qv   [N];

  for (genvar i = 0; i < N; i++) begin : g_lane
    assign dsg[i]  = (DATA_W+1)'(x[i]) - (DATA_W+1)'(mean);
    assign dabs[i] = (dsg[i] < 0) ? VW'(-dsg[i]) : VW'(dsg[i]);
    appro_ln  #(.IN_W(VW), .IN_F(FRAC), .OUT_W(LN_W), .OUT_F(CF)) u_ln_d (.x(dabs[i]), .y(ln_d[i]));
    assign zq[i] = ZW'(ln_d[i]) - ZW'(ln_std);
    appro_exp #(.IN_W(ZW), .IN_F(CF), .OUT_W(DATA_W-1), .OUT_F(FRAC)) u_exp_q (.x(zq[i]), .y(qv[i]));
  end

  assign busy  = (state != S_IDLE) || sqrt_busy;
  assign var_o = var_r;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      var_r      <= '0;
      std_r      <= '0;
      sqrt_start <= 1'b0;
      sqrt_iters <= '0;
      done       <= 1'b0;
      for (int i = 0; i < N; i++) y[i] <= '0;
    end else begin
      sqrt_start <= 1'b0;
      done       <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          var_r      <= var_c;
          sqrt_start <= 1'b1;
          state      <= S_SQRT;
        end
        S_SQRT: if (sqrt_done) begin
          std_r      <= root;
          sqrt_iters <= iters;
          state      <= S_OUT;
        end
        S_OUT: begin
          for (int i = 0; i < N; i++) begin
            if (!lane_en[i] || std_r == '0 || dabs[i] == '0) y[i] <= '0;
            else if (dsg[i] < 0)                             y[i] <= -DATA_W'(qv[i]);
            else                                             y[i] <= DATA_W'(qv[i]);
          end
          done  <= 1'b1;
          state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
