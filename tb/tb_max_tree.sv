// tb_max_tree: random rows and lane masks on a 10-lane tree (not a power of
// two), compared with a plain loop maximum.
module tb_max_tree;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int N = 10;
  logic signed [15:0] x [N];
  logic [N-1:0] en;
  logic signed [15:0] y;
  max_tree #(.N(N), .W(16)) dut (.x(x), .lane_en(en), .y(y));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic signed [15:0] m;
    for (int t = 0; t < 5000; t++) begin
      for (int i = 0; i < N; i++) x[i] = 16'($urandom);
      en = (t % 4 == 0) ? '1 : N'($urandom);
      if (en == '0) en[0] = 1'b1;
      m = 16'sh8000;
      for (int i = 0; i < N; i++) if (en[i] && x[i] > m) m = x[i];
      #1;
      checks++;
      if (y != m) begin
        failures++;
        if (failures < 10) $display("max got %0d exp %0d", y, m);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
