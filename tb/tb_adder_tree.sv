// tb_adder_tree: random signed rows on a 10-lane tree; checks the full sum and
// the five first-level pair sums against plain loops.
module tb_adder_tree;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int N = 10;
  logic signed [15:0] x [N];
  logic signed [39:0] pair [N/2];
  logic signed [39:0] sum;
  adder_tree #(.N(N), .W(16), .OW(40)) dut (.x(x), .pair(pair), .sum(sum));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint s;
    for (int t = 0; t < 5000; t++) begin
      for (int i = 0; i < N; i++) x[i] = 16'($urandom);
      #1;
      s = 0;
      for (int i = 0; i < N; i++) s += longint'(x[i]);
      checks++;
      if (longint'(sum) != s) begin failures++; $display("sum got %0d exp %0d", sum, s); end
      for (int k = 0; k < N/2; k++) begin
        checks++;
        if (longint'(pair[k]) != longint'(x[2*k]) + longint'(x[2*k+1])) failures++;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
