// tb_log_divider: a / b through the log domain, checked bit for bit against
// the reference composition and within 8 % of the true quotient.
module tb_log_divider;
  import quark_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [39:0] a, b;
  logic [15:0] q;
  log_divider dut (.a(a), .b(b), .q(q));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint av, bv, e;
    real r, g;
    a = 0; b = 100; #1; checks++; if (q != 0) failures++;
    a = 100; b = 0; #1; checks++; if (q != 16'hffff) failures++;
    for (int i = 0; i < 20000; i++) begin
      av = longint'($urandom_range(1, 1 << 20));
      bv = longint'($urandom_range(1, 1 << 20));
      a = 40'(av); b = 40'(bv); #1;
      e = ref_div(av, bv, 12, 16, 8);
      checks++;
      if (longint'(q) != e) begin
        failures++;
        if (failures < 10) $display("div %0d/%0d got %0d exp %0d", av, bv, q, e);
      end
      r = real'(av) / real'(bv);
      g = real'(q) / 256.0;
      if (r >= 0.25 && r < 200.0) begin
        checks++;
        if (absr(g - r) > 0.08 * r + 0.01) begin
          failures++;
          if (failures < 10) $display("div accuracy %f got %f", r, g);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
