// tb_newton_sqrt: random variances (Q.8, 24 bits).  Checks root and iteration
// count against a reference iteration, that no run takes more than ten
// iterations, that done arrives iters + 1 cycles after start, and that the
// root is within 6 % of the true square root.
module tb_newton_sqrt;
  import quark_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic rst_n, start, busy, done;
  logic [23:0] v, root;
  logic [3:0] iters;
  int n_conv = 0, n_cap = 0;
  newton_sqrt dut (.clk, .rst_n, .start, .v, .busy, .done, .root, .iters);

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
    longint vv, xr, xn, er;
    int msb, e0, ei, cyc;
    real r;
    rst_n = 0; start = 0; v = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    for (int t = 0; t < 3000; t++) begin
      vv = (t == 0) ? 0 : longint'($urandom_range(1, (1 << $urandom_range(1, 23))));
      // reference
      msb = 0;
      for (int i = 0; i < 24; i++) if (vv >= (64'sd1 << i)) msb = i;
      e0 = ((msb - 8) >>> 1) + 8;
      xr = (e0 < 0) ? 1 : (64'sd1 << e0);
      ei = 0;
      if (vv == 0) xr = 0;
      else begin
        do begin
          xn = (xr + ref_div(vv, xr, 8, 24, 8)) >> 1;
          ei++;
          if (xn == xr || ei >= 10) begin xr = xn; break; end
          xr = xn;
        end while (1);
      end
      er = xr;
      // run
      @(negedge clk); v = 24'(vv); start = 1;
      @(negedge clk); start = 0;
      cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks += 3;
      if (longint'(root) != er) fail($sformatf("sqrt v=%0d got %0d exp %0d", vv, root, er));
      if (int'(iters) != ei)     fail($sformatf("iters v=%0d got %0d exp %0d", vv, iters, ei));
      if (iters > 10)            fail("more than ten iterations");
      checks++;
      if (vv != 0 && cyc != int'(iters) + 1) fail($sformatf("latency %0d for %0d iterations", cyc, iters));
      if (vv != 0) begin
        if (iters < 10) n_conv++; else n_cap++;
        r = $sqrt(real'(vv) / 256.0);
        checks++;
        if (absr(real'(root) / 256.0 - r) > 0.06 * r + 0.02)
          fail($sformatf("sqrt accuracy v=%f got %f want %f", real'(vv)/256.0, real'(root)/256.0, r));
      end
      @(negedge clk);
    end
    $display("converged early %0d, stopped at ten iterations %0d", n_conv, n_cap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
