// tb_group_quant_unit: 16 lanes in 4 groups with random calibration (Max,
// Min, 2..8 bits, per-group shifts alpha).  Each lane's code and the aligned,
// rescaled sum x_int are compared with a reference written from the equations
// q = clip(round(x / (2^alpha S)), 0, 2^bits - 1),
// x_int = S * sum q << alpha.  Also checks the one-cycle latency and counts
// clipped lanes at both ends.
module tb_group_quant_unit;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int N = 16, NG = 4;
  logic rst_n, in_valid, out_valid;
  logic signed [15:0] x [N], qmax, qmin;
  logic [N-1:0] en;
  logic [3:0] qbits;
  logic [1:0] grp [N];
  logic [3:0] alpha [NG];
  logic [7:0] q [N];
  logic signed [39:0] x_int;
  logic [4:0] s;
  int n_hi = 0, n_lo = 0;

  group_quant_unit #(.N(N), .NG(NG), .QW(8)) dut (.clk, .rst_n, .in_valid, .x, .lane_en(en),
    .qmax, .qmin, .qbits, .lane_grp(grp), .alpha, .out_valid, .q, .x_int, .s);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint rng, sc, sh, r, lim, eq [N], sum;
    int c;
    rst_n = 0; in_valid = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      qmax  = 16'($urandom_range(1, 8000));
      qmin  = -16'($urandom_range(0, 2000));
      qbits = 4'($urandom_range(2, 8));
      for (int g = 0; g < NG; g++) alpha[g] = (g == 0) ? 0 : 4'($urandom_range(0, 4));
      for (int i = 0; i < N; i++) begin
        x[i]   = 16'($signed($urandom_range(0, 12000)) - 2000);
        grp[i] = 2'($urandom_range(0, NG - 1));
        en[i]  = ($urandom_range(0, 7) != 0);
      end
      // reference
      rng = longint'(qmax) - longint'(qmin);
      c = 0;
      while ((64'sd1 << c) < rng) c++;
      sc  = (c > qbits) ? c - qbits : 0;
      lim = (64'sd1 << qbits) - 1;
      sum = 0;
      for (int i = 0; i < N; i++) begin
        sh = sc + alpha[grp[i]];
        r  = (sh == 0) ? longint'(x[i]) : ((longint'(x[i]) + (64'sd1 << (sh - 1))) >>> sh);
        if (!en[i] || r <= 0) begin eq[i] = 0; if (en[i] && r < 0) n_lo++; end
        else if (r >= lim) begin eq[i] = lim; if (r > lim) n_hi++; end
        else eq[i] = r;
        sum += eq[i] << alpha[grp[i]];
      end
      in_valid = 1;
      @(negedge clk); in_valid = 0;
      checks++;
      if (!out_valid) failures++;
      for (int i = 0; i < N; i++) begin
        checks++;
        if (longint'(q[i]) != eq[i]) begin
          failures++;
          if (failures < 10) $display("lane %0d x=%0d got %0d exp %0d", i, x[i], q[i], eq[i]);
        end
      end
      checks += 2;
      if (longint'(s) != sc) failures++;
      if (longint'(x_int) != (sum << sc)) begin
        failures++;
        if (failures < 10) $display("x_int got %0d exp %0d", x_int, sum << sc);
      end
    end
    $display("clipped high %0d low %0d", n_hi, n_lo);
    checks++;
    if (n_hi == 0 || n_lo == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
