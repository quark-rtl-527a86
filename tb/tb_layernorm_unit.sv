// tb_layernorm_unit: 16-lane rows of random length with small mean and unit-
// scale spread.  The mean input is the real mean rounded to Q8.8 (in the full
// unit it comes from the shared core).  Checks every output lane within
// 0.12 |y| + 0.06 of the exact (x - mean) / std, masked lanes at 0, the
// variance against E(x^2) - mean^2 within 8 %, and the cycle count
// (square-root iterations + 4 from start to done).
module tb_layernorm_unit;
  import quark_pkg::*;
  import quark_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int N = 16;
  logic rst_n, start, busy, done;
  logic signed [15:0] x [N], y [N], mean;
  logic [N-1:0] en;
  logic signed [23:0] ln_n;
  logic [23:0] var_o;
  logic [3:0] iters;
  layernorm_unit #(.N(N)) dut (.clk, .rst_n, .start, .x, .lane_en(en), .ln_n, .mean,
                               .busy, .done, .y, .var_o, .sqrt_iters(iters));

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
    int n, cyc;
    real mu, ex2, vr, sd, want, got;
    rst_n = 0; start = 0;
    for (int i = 0; i < N; i++) x[i] = 0;
    en = '0; ln_n = 0; mean = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      n = $urandom_range(4, N);
      for (int i = 0; i < N; i++) x[i] = 16'($signed($urandom_range(0, 1024)) - 512 + $signed($urandom_range(0, 64)) - 32);
      for (int i = 0; i < N; i++) en[i] = (i < n);
      mu = 0.0; ex2 = 0.0;
      for (int i = 0; i < n; i++) begin
        mu  += real'(x[i]) / 256.0;
        ex2 += (real'(x[i]) / 256.0) ** 2;
      end
      mu /= real'(n); ex2 /= real'(n);
      vr = ex2 - mu * mu;
      sd = $sqrt(vr);
      mean = 16'($rtoi(mu * 256.0));
      ln_n = 24'(ref_ln(n, 0, 12));
      start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (cyc != int'(iters) + 4) fail($sformatf("latency %0d with %0d iterations", cyc, iters));
      checks++;
      if (absr(real'(var_o) / 256.0 - vr) > 0.08 * vr + 0.01)
        fail($sformatf("variance got %f want %f", real'(var_o) / 256.0, vr));
      for (int i = 0; i < N; i++) begin
        got = real'(y[i]) / 256.0;
        want = (i < n) ? (real'(x[i]) / 256.0 - mu) / sd : 0.0;
        checks++;
        if (absr(got - want) > 0.12 * absr(want) + 0.06)
          fail($sformatf("LN lane %0d got %f want %f", i, got, want));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
