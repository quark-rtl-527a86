// tb_softmax_core: the shared datapath in its three modes on a 16-lane core.
// Softmax: random rows with random lengths, bit-exact against the reference
// model and within 0.03 of the real Softmax.  GELU: eight binary Softmaxes
// [0, v], first outputs within 0.03 of 1/(1+e^v).  LN: the mean, bit-exact and
// within 5 % (+0.02) of the real mean (the log-domain division is a few percent off).
module tb_softmax_core;
  import quark_pkg::*;
  import quark_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int N = 16;
  mode_e mode;
  logic signed [15:0] x [N], y [N];
  logic [N-1:0] en;
  logic signed [23:0] ln_n;
  softmax_core #(.N(N)) dut (.mode(mode), .x(x), .lane_en(en), .ln_n(ln_n), .y(y));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string s);
    failures++;
    if (failures < 12) $display("%s", s);
  endtask

  initial begin
    longint m, s, l0, e, d;
    real rs, rv, g;
    int n;
    // ---------------- Softmax
    for (int t = 0; t < 400; t++) begin
      mode = MODE_SOFTMAX;
      n = $urandom_range(1, N);
      for (int i = 0; i < N; i++) x[i] = 16'($signed($urandom_range(0, 3072)) - 1536);
      for (int i = 0; i < N; i++) en[i] = (i < n);
      ln_n = 0;
      #1;
      m = -100000;
      for (int i = 0; i < n; i++) if (x[i] > m) m = x[i];
      s = 0;
      for (int i = 0; i < n; i++) s += ref_exp(x[i] - m, 8, 14, 12);
      l0 = ref_ln(s, 12, 12);
      rs = 0.0;
      for (int i = 0; i < n; i++) rs += $exp(real'(x[i]) / 256.0);
      for (int i = 0; i < N; i++) begin
        e = (i < n) ? ref_exp((x[i] - m) * 16 - l0, 12, 15, 8) : 0;
        checks++;
        if (longint'(y[i]) != e) fail($sformatf("softmax lane %0d got %0d exp %0d", i, y[i], e));
        if (i < n) begin
          rv = $exp(real'(x[i]) / 256.0) / rs;
          g  = real'(y[i]) / 256.0;
          checks++;
          if (absr(g - rv) > 0.03) fail($sformatf("softmax accuracy got %f want %f", g, rv));
        end
      end
    end
    // ---------------- GELU (binary Softmax pairs)
    for (int t = 0; t < 400; t++) begin
      mode = MODE_GELU;
      en = '0;
      for (int k = 0; k < N/2; k++) begin
        x[2*k]   = 0;
        x[2*k+1] = 16'($signed($urandom_range(0, 2100)) - 1050);
      end
      #1;
      for (int k = 0; k < N/2; k++) begin
        m  = (x[2*k+1] > 0) ? longint'(x[2*k+1]) : 0;
        s  = ref_exp(-m, 8, 14, 12) + ref_exp(x[2*k+1] - m, 8, 14, 12);
        l0 = ref_ln(s, 12, 12);
        e  = ref_exp((0 - m) * 16 - l0, 12, 15, 8);
        checks++;
        if (longint'(y[2*k]) != e) fail($sformatf("gelu pair %0d got %0d exp %0d", k, y[2*k], e));
        rv = 1.0 / (1.0 + $exp(real'(x[2*k+1]) / 256.0));
        g  = real'(y[2*k]) / 256.0;
        checks++;
        if (absr(g - rv) > 0.03) fail($sformatf("sigmoid accuracy got %f want %f", g, rv));
      end
    end
    // ---------------- LN mean
    for (int t = 0; t < 400; t++) begin
      mode = MODE_LN;
      n = $urandom_range(1, N);
      for (int i = 0; i < N; i++) x[i] = 16'($signed($urandom_range(0, 4096)) - 2048 + ((t % 3) - 1) * 512);
      for (int i = 0; i < N; i++) en[i] = (i < n);
      ln_n = 24'(ref_ln(n, 0, 12));
      #1;
      s = 0;
      for (int i = 0; i < n; i++) s += longint'(x[i]) * 16;
      d = (s < 0) ? -s : s;
      e = (s == 0) ? 0 : ref_exp(ref_ln(d, 12, 12) - ref_ln(n, 0, 12), 12, 15, 8);
      if (s < 0) e = -e;
      rv = real'(s) / 16.0 / 256.0 / real'(n);
      for (int i = 0; i < N; i++) begin
        checks++;
        if (longint'(y[i]) != e) fail($sformatf("LN mean lane %0d got %0d exp %0d", i, y[i], e));
      end
      g = real'(y[0]) / 256.0;
      checks++;
      if (absr(g - rv) > 0.05 * absr(rv) + 0.02) fail($sformatf("mean accuracy got %f want %f", g, rv));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
