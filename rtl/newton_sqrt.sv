// newton_sqrt: iterative square root without a divider (the "Sqrt" block).
//
// Newton's iteration x_{i+1} = (x_i + v / x_i) >> 1 (paper Eq. 17), where the
// quotient v / x_i comes from a log_divider (Eq. 18).  The start value is
// x_0 = 2^floor(bit(v)/2) (paper), here 2^floor(qM/2) in real units with qM
// the integer part of log2(v).  The paper states convergence within ten
// iterations; this block stops when an iteration no longer changes x or after
// MAX_ITER iterations, whichever comes first (the stop rule is this design's).
//
// Interface: v is unsigned with F fractional bits; root has the same format.
// A start pulse in idle begins; done pulses for one cycle with root and iters
// (the number of iterations run) valid until the next start.  One iteration
// per clock: latency is iters + 1 cycles from start to done.  v = 0 returns 0.
module newton_sqrt #(
  parameter int VW       = 24,
  parameter int F        = 8,
  parameter int MAX_ITER = 10
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [VW-1:0] v,
  output logic          busy,
  output logic          done,
  output logic [VW-1:0] root,
  output logic [3:0]    iters
);

  typedef enum logic [1:0] {S_IDLE, S_ITER, S_DONE} state_e;

  state_e               state;
  logic [VW-1:0]        vr, xr, quot, xn;
  logic [$clog2(VW)-1:0] msb;
  logic signed [$clog2(VW)+1:0] qm, e0;
  logic [VW-1:0]        x0;

  always_comb begin
    msb = '0;
    for (int i = 0; i < VW; i++)
      if (v[i]) msb = ($clog2(VW))'(i);
    qm = ($clog2(VW)+2)'(msb) - ($clog2(VW)+2)'(F);
    e0 = (qm >>> 1) + ($clog2(VW)+2)'(F);
    x0 = (e0 < 0) ? VW'(1) : (VW'(1) << e0);
  end

  log_divider #(.W(VW), .F(F), .OUT_W(VW), .OUT_F(F)) u_div (.a(vr), .b(xr), .q(quot));

  assign xn   = VW'(({1'b0, xr} + {1'b0, quot}) >> 1);
  assign busy = (state != S_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      vr    <= '0;
      xr    <= '0;
      root  <= '0;
      iters <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      case (state)
        S_IDLE: if (start) begin
          vr    <= v;
          xr    <= x0;
          iters <= '0;
          if (v == '0) begin
            root  <= '0;
            done  <= 1'b1;
          end else begin
            state <= S_ITER;
          end
        end
        S_ITER: begin
          iters <= iters + 4'd1;
          xr    <= xn;
          if (xn == xr || int'(iters) + 1 >= MAX_ITER) begin
            root  <= xn;
            done  <= 1'b1;
            state <= S_DONE;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
