// tb_gelu_post: checks x * s inside (-2.4, 2.4), ReLU(x) outside, the lane
// count mask and the ReLU select flags.
module tb_gelu_post;
  import quark_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int N = 8;
  logic signed [15:0] x [N], s [N], g [N];
  logic [3:0] n;
  logic [N/2-1:0] rs;
  int nrelu = 0;
  gelu_post #(.N(N)) dut (.x(x), .s(s), .n(n), .g(g), .relu_sel(rs));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e;
    bit r;
    for (int t = 0; t < 3000; t++) begin
      for (int i = 0; i < N; i++) begin
        x[i] = 16'($signed($urandom_range(0, 2000)) - 1000);
        s[i] = 16'($urandom_range(0, 256));
      end
      n = 4'($urandom_range(0, N/2));
      #1;
      for (int k = 0; k < N; k++) begin
        r = (k < N/2) && (x[k] >= 615 || x[k] <= -615);
        if (k >= int'(n) || k >= N/2) e = 0;
        else if (r) e = (x[k] > 0) ? longint'(x[k]) : 0;
        else e = (longint'(x[k]) * longint'(s[2*k])) >>> 8;
        checks++;
        if (longint'(g[k]) != e) begin
          failures++;
          if (failures < 10) $display("post k=%0d x=%0d s=%0d got %0d exp %0d", k, x[k], s[2*k], g[k], e);
        end
        if (k < N/2) begin
          checks++;
          if (rs[k] != r) failures++;
          if (r && k < int'(n)) nrelu++;
        end
      end
    end
    checks++;
    if (nrelu == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
