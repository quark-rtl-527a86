// tb_shared_buffer: random reads and writes on both ports of an 8-lane,
// 8-word buffer against a shadow array, including the one-cycle read latency
// and the rule that port A wins a same-word write collision.
module tb_shared_buffer;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int N = 8, D = 8;
  logic a_en, a_we, b_en, b_we;
  logic [2:0] a_addr, b_addr;
  logic [15:0] a_wdata [N], a_rdata [N], b_wdata [N], b_rdata [N];
  logic [15:0] shadow [D][N];
  logic [15:0] ea [N], eb [N];
  logic ca, cb;
  int n_coll = 0;

  shared_buffer #(.N(N), .W(16), .DEPTH(D)) dut (.clk, .a_en, .a_we, .a_addr, .a_wdata, .a_rdata,
                                                 .b_en, .b_we, .b_addr, .b_wdata, .b_rdata);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    a_en = 0; b_en = 0; a_we = 0; b_we = 0; a_addr = 0; b_addr = 0;
    // fill through port A
    for (int w = 0; w < D; w++) begin
      @(negedge clk);
      a_en = 1; a_we = 1; a_addr = 3'(w);
      for (int i = 0; i < N; i++) begin a_wdata[i] = 16'($urandom); shadow[w][i] = a_wdata[i]; end
    end
    @(negedge clk); a_en = 0; a_we = 0;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      a_en = $urandom_range(0, 1); a_we = $urandom_range(0, 1); a_addr = 3'($urandom);
      b_en = $urandom_range(0, 1); b_we = $urandom_range(0, 1); b_addr = 3'($urandom);
      if ($urandom_range(0, 3) == 0) b_addr = a_addr;
      for (int i = 0; i < N; i++) begin a_wdata[i] = 16'($urandom); b_wdata[i] = 16'($urandom); end
      ca = a_en && !a_we; cb = b_en && !b_we;
      for (int i = 0; i < N; i++) begin ea[i] = shadow[a_addr][i]; eb[i] = shadow[b_addr][i]; end
      if (a_en && a_we && b_en && b_we && a_addr == b_addr) n_coll++;
      if (b_en && b_we && !(a_en && a_we && a_addr == b_addr))
        for (int i = 0; i < N; i++) shadow[b_addr][i] = b_wdata[i];
      if (a_en && a_we) for (int i = 0; i < N; i++) shadow[a_addr][i] = a_wdata[i];
      @(negedge clk);
      a_en = 0; b_en = 0;
      for (int i = 0; i < N; i++) begin
        if (ca) begin checks++; if (a_rdata[i] != ea[i]) failures++; end
        if (cb) begin checks++; if (b_rdata[i] != eb[i]) failures++; end
      end
    end
    // final readback of every word
    for (int w = 0; w < D; w++) begin
      @(negedge clk); b_en = 1; b_we = 0; b_addr = 3'(w);
      @(negedge clk); b_en = 0;
      for (int i = 0; i < N; i++) begin checks++; if (b_rdata[i] != shadow[w][i]) failures++; end
    end
    checks++;
    if (n_coll == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
