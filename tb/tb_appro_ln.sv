// tb_appro_ln: checks appro_ln bit for bit against the reference model and
// against ln() within the accuracy of the approximation over 2^-12 .. 2^27.
module tb_appro_ln;
  import quark_ref_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  logic [39:0] x;
  logic signed [23:0] y;
  appro_ln dut (.x(x), .y(y));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(longint v);
    longint e;
    real r, g;
    x = 40'(v); #1;
    e = ref_ln(v, 12, 12);
    checks++;
    if (longint'(y) != e) begin
      failures++;
      if (failures < 10) $display("ln x=%0d got %0d exp %0d", v, y, e);
    end
    if (v > 0) begin
      r = $ln(real'(v) / 4096.0);
      g = real'(y) / 4096.0;
      checks++;
      if (absr(g - r) > 0.03 + 0.01 * absr(r)) begin
        failures++;
        if (failures < 10) $display("ln accuracy x=%f got %f want %f", real'(v)/4096.0, g, r);
      end
    end
  endtask

  initial begin
    x = 0; #1; checks++; if (y != 24'h800000) begin failures++; $display("ln(0) = %0d", y); end
    for (longint v = 1; v <= 20000; v++) check(v);
    for (int i = 0; i < 20000; i++) check(longint'({$urandom, $urandom}) & ((64'sd1 << ($urandom_range(1, 39))) - 1));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
