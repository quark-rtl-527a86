// quark_nonlinear_unit: the sub-operator sharing unit.
//
// Softmax, GELU and LayerNorm are served by one softmax_core, used by one
// operation at a time (time-division multiplexing, paper Sec. IV-A):
//   Softmax   the core in MODE_SOFTMAX over the n valid lanes
//   GELU      gelu_pre -> core in MODE_GELU -> gelu_post, n <= N/2 inputs in
//             lanes 0 .. n-1, outputs in the same lanes
//   LayerNorm core in MODE_LN gives the mean, then layernorm_unit (variance,
//             Newton square root, per-lane log division)
// ln n, needed by the LN mean and by E(x^2), is formed here by an appro_ln of
// the lane count.
//
// Interface: valid/ready input.  When in_valid and in_ready are both high the
// unit takes mode, x (Q8.8) and n (valid lanes).  out_valid pulses for one
// cycle; y holds its value until the next result.  Latency, counted in clock
// edges from the accepting edge to the edge that raises out_valid, both
// included: 2 for Softmax and GELU; 7 + square-root iterations (at most 10)
// for LayerNorm.  The cycle-level schedule is this
// design's choice; the paper gives no latency for the unit.
module quark_nonlinear_unit
  import quark_pkg::*;
#(
  parameter int N = 384
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  output logic                     in_ready,
  input  mode_e                    mode,
  input  logic signed [DATA_W-1:0] x [N],
  input  logic [$clog2(N+1)-1:0]   n,
  output logic                     out_valid,
  output logic signed [DATA_W-1:0] y [N],
  output logic [N/2-1:0]           relu_sel,
  output logic [3:0]               sqrt_iters
);

  localparam int NW = $clog2(N+1);

  typedef enum logic [1:0] {S_IDLE, S_CORE, S_LN_START, S_LN_WAIT} state_e;
  state_e state;

  mode_e                    mode_r;
  logic signed [DATA_W-1:0] xr     [N];
  logic [NW-1:0]            nr;
  logic [N-1:0]             lane_en;
  logic signed [DATA_W-1:0] gpre   [N];
  logic signed [DATA_W-1:0] core_x [N];
  logic signed [DATA_W-1:0] core_y [N];
  logic signed [DATA_W-1:0] gout   [N];
  logic signed [DATA_W-1:0] ln_y   [N];
  logic [N/2-1:0]           relu_c;
  logic signed [LN_W-1:0]   ln_n;
  logic signed [DATA_W-1:0] mean_r;
  logic                     ln_start, ln_done;
  logic [3:0]               ln_iters;

  always_comb
    for (int i = 0; i < N; i++) lane_en[i] = (i < int'(nr));

  appro_ln #(.IN_W(NW), .IN_F(0), .OUT_W(LN_W), .OUT_F(CF)) u_ln_n (.x(nr), .y(ln_n));

  gelu_pre #(.N(N)) u_gelu_pre (.x(xr), .c(gpre));

  always_comb
    for (int i = 0; i < N; i++) core_x[i] = (mode_r == MODE_GELU) ? gpre[i] : xr[i];

  softmax_core #(.N(N)) u_core (
    .mode(mode_r), .x(core_x), .lane_en(lane_en), .ln_n(ln_n), .y(core_y)
  );

  gelu_post #(.N(N)) u_gelu_post (.x(xr), .s(core_y), .n(nr), .g(gout), .relu_sel(relu_c));

  layernorm_unit #(.N(N)) u_ln (
    .clk, .rst_n, .start(ln_start), .x(xr), .lane_en(lane_en), .ln_n(ln_n),
    .mean(mean_r), .busy(), .done(ln_done), .y(ln_y), .var_o(),
    .sqrt_iters(ln_iters)
  );

  assign in_ready = (state == S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      mode_r     <= MODE_SOFTMAX;
      nr         <= '0;
      mean_r     <= '0;
      ln_start   <= 1'b0;
      out_valid  <= 1'b0;
      relu_sel   <= '0;
      sqrt_iters <= '0;
      for (int i = 0; i < N; i++) begin
        xr[i] <= '0;
        y[i]  <= '0;
      end
    end else begin
      out_valid <= 1'b0;
      ln_start  <= 1'b0;
      case (state)
        S_IDLE: if (in_valid) begin
          mode_r <= mode;
          nr     <= n;
          for (int i = 0; i < N; i++) xr[i] <= x[i];
          state  <= S_CORE;
        end
        S_CORE: begin
          case (mode_r)
            MODE_SOFTMAX: begin
              for (int i = 0; i < N; i++) y[i] <= core_y[i];
              out_valid <= 1'b1;
              state     <= S_IDLE;
            end
            MODE_GELU: begin
              for (int i = 0; i < N; i++) y[i] <= gout[i];
              relu_sel  <= relu_c;
              out_valid <= 1'b1;
              state     <= S_IDLE;
            end
            default: begin
              mean_r   <= core_y[0];
              ln_start <= 1'b1;
              state    <= S_LN_START;
            end
          endcase
        end
        S_LN_START: state <= S_LN_WAIT;
        S_LN_WAIT: if (ln_done) begin
          for (int i = 0; i < N; i++) y[i] <= ln_y[i];
          sqrt_iters <= ln_iters;
          out_valid  <= 1'b1;
          state      <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
