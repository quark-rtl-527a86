// tb_gelu_pre: checks the binary-Softmax pairs [0, -1.702 x] (Q8.8, truncated,
// saturated) for random and extreme inputs.
module tb_gelu_pre;
  import quark_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int N = 8;
  logic signed [15:0] x [N];
  logic signed [15:0] c [N];
  gelu_pre #(.N(N)) dut (.x(x), .c(c));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e;
    for (int t = 0; t < 3000; t++) begin
      for (int i = 0; i < N; i++) x[i] = (t < 10) ? ((t % 2) ? 16'sh7fff : 16'sh8000) : 16'($urandom);
      #1;
      for (int k = 0; k < N/2; k++) begin
        e = -((longint'(x[k]) * 436) >>> 8);
        if (e > 32767) e = 32767;
        if (e < -32768) e = -32768;
        checks += 2;
        if (c[2*k] != 0) failures++;
        if (longint'(c[2*k+1]) != e) begin
          failures++;
          if (failures < 10) $display("pre x=%0d got %0d exp %0d", x[k], c[2*k+1], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
