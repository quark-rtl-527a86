// tb_appro_exp: checks appro_exp bit for bit against the reference model and
// against exp() within the accuracy of the approximation, for the two
// configurations the design uses (Q.12 log-domain input, Q.8 Softmax input).
module tb_appro_exp;
  import quark_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic signed [23:0] xa;  logic [15:0] ya;   // default: Q.12 in, Q.8 out
  logic signed [16:0] xb;  logic [13:0] yb;   // Softmax row: Q.8 in, Q.12 out

  appro_exp dut_a (.x(xa), .y(ya));
  appro_exp #(.IN_W(17), .IN_F(8), .OUT_W(14), .OUT_F(12)) dut_b (.x(xb), .y(yb));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_a(longint v);
    longint e;
    xa = 24'(v); #1;
    e = ref_exp(v, 12, 16, 8);
    checks++;
    if (longint'(ya) != e) begin
      failures++;
      if (failures < 10) $display("exp Q12 x=%0d got %0d exp %0d", v, ya, e);
    end
  endtask

  task automatic check_b(longint v);
    longint e;
    real r, g;
    xb = 17'(v); #1;
    e = ref_exp(v, 8, 14, 12);
    checks++;
    if (longint'(yb) != e) begin
      failures++;
      if (failures < 10) $display("exp Q8 x=%0d got %0d exp %0d", v, yb, e);
    end
    // accuracy against exp(x) for x in [-8, 0]
    if (v >= -2048 && v <= 0) begin
      r = $exp(real'(v) / 256.0);
      g = real'(yb) / 4096.0;
      checks++;
      if (absr(g - r) > 0.01) begin
        failures++;
        if (failures < 10) $display("exp accuracy x=%f got %f want %f", real'(v)/256.0, g, r);
      end
    end
  endtask

  initial begin
    // fixed points: exp(0) = 0.998, exp(-ln2) ~ 0.5
    xb = 0; #1; checks++; if (yb != 14'(4088)) begin failures++; $display("exp(0) = %0d", yb); end
    for (longint v = -4000; v <= 0; v++) check_b(v);
    for (int i = 0; i < 20000; i++) check_a(longint'($signed($urandom_range(0, 200000))) - 150000);
    for (int i = 0; i < 200; i++) check_a(longint'($signed($urandom_range(0, 2000))) + 60000);  // saturation
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
