// tb_quark_nonlinear_unit: the time-multiplexed unit (16 lanes) running
// Softmax, GELU and LayerNorm requests back to back in random order.  Results
// are compared with real-valued Softmax, x * sigmoid(1.702 x) / ReLU and
// LayerNorm within the accuracy of the approximations (LayerNorm: 25 % + 0.1,
// as the one-pass variance amplifies the few-percent error of the log-domain
// mean and E(x^2) when the mean is not small), and the latency is
// checked: 2 cycles for Softmax and GELU, square-root iterations + 7 for
// LayerNorm.  Counts how often each mode and the ReLU branch were used.
module tb_quark_nonlinear_unit;
  import quark_pkg::*;
  import quark_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int N = 16;
  logic rst_n, in_valid, in_ready, out_valid;
  mode_e mode;
  logic signed [15:0] x [N], y [N];
  logic [4:0] n;
  logic [N/2-1:0] relu_sel;
  logic [3:0] iters;
  int cnt [3] = '{0, 0, 0};
  int n_relu = 0;

  quark_nonlinear_unit #(.N(N)) dut (.clk, .rst_n, .in_valid, .in_ready, .mode, .x, .n,
                                     .out_valid, .y, .relu_sel, .sqrt_iters(iters));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string s);
    failures++;
    if (failures < 12) $display("%s", s);
  endtask

  initial begin
    int nn, cyc, m;
    real rx [N];
    real s, mu, vr, want, got, sg;
    rst_n = 0; in_valid = 0; mode = MODE_SOFTMAX; n = 0;
    for (int i = 0; i < N; i++) x[i] = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 600; t++) begin
      @(negedge clk);
      m = $urandom_range(0, 2);
      mode = mode_e'(m);
      nn = (m == 1) ? $urandom_range(1, N/2) : $urandom_range(4, N);
      for (int i = 0; i < N; i++) begin
        x[i] = 16'($signed($urandom_range(0, 1600)) - 800);
        rx[i] = real'(x[i]) / 256.0;
      end
      n = 5'(nn);
      checks++;
      if (!in_ready) fail("not ready in idle");
      in_valid = 1;
      @(negedge clk); in_valid = 0;
      cyc = 1;
      while (!out_valid) begin @(negedge clk); cyc++; end
      cnt[m]++;
      checks++;
      if (m != 2 && cyc != 2) fail($sformatf("mode %0d latency %0d", m, cyc));
      if (m == 2 && cyc != int'(iters) + 7) fail($sformatf("LN latency %0d iters %0d", cyc, iters));
      case (m)
        0: begin
          s = 0.0;
          for (int i = 0; i < nn; i++) s += $exp(rx[i]);
          for (int i = 0; i < N; i++) begin
            want = (i < nn) ? $exp(rx[i]) / s : 0.0;
            got = real'(y[i]) / 256.0;
            checks++;
            if (absr(got - want) > 0.03) fail($sformatf("softmax got %f want %f", got, want));
          end
        end
        1: begin
          for (int k = 0; k < N; k++) begin
            if (k >= nn) want = 0.0;
            else if (x[k] >= 615 || x[k] <= -615) begin
              want = (rx[k] > 0.0) ? rx[k] : 0.0;
              n_relu++;
            end else begin
              sg = 1.0 / (1.0 + $exp(-1.702 * rx[k]));
              want = rx[k] * sg;
            end
            got = real'(y[k]) / 256.0;
            checks++;
            if (absr(got - want) > 0.03 + 0.03 * absr(want)) fail($sformatf("gelu x=%f got %f want %f", rx[k], got, want));
          end
        end
        default: begin
          mu = 0.0; vr = 0.0;
          for (int i = 0; i < nn; i++) mu += rx[i];
          mu /= real'(nn);
          for (int i = 0; i < nn; i++) vr += (rx[i] - mu) ** 2;
          vr /= real'(nn);
          for (int i = 0; i < N; i++) begin
            want = (i < nn) ? (rx[i] - mu) / $sqrt(vr) : 0.0;
            got = real'(y[i]) / 256.0;
            checks++;
            if (absr(got - want) > 0.25 * absr(want) + 0.10) fail($sformatf("LN got %f want %f", got, want));
          end
        end
      endcase
    end
    $display("softmax %0d gelu %0d layernorm %0d relu lanes %0d", cnt[0], cnt[1], cnt[2], n_relu);
    checks += 4;
    if (cnt[0] == 0 || cnt[1] == 0 || cnt[2] == 0) failures++;
    if (n_relu == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
