// tb_quark_top_full: quark_top at its default size (384 lanes, 16 buffer
// words, 4 quantization groups).  Runs one complete operation of each kind on
// transformer-sized rows: Softmax over a 197-token attention row, GELU over
// 192 activations, LayerNorm over a 384-channel row, then a quantized
// write-back, and checks the results against real-valued math.
module tb_quark_top_full;
  import quark_pkg::*;
  import quark_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int N = 384, NG = 4;
  logic rst_n;
  logic pe_en, pe_we;
  logic [3:0] pe_addr;
  logic [15:0] pe_wdata [N], pe_rdata [N];
  logic cmd_valid, cmd_ready, cmd_quant, done;
  mode_e cmd_mode;
  logic [8:0] cmd_n;
  logic [3:0] cmd_src, cmd_dst;
  logic signed [15:0] cfg_qmax, cfg_qmin;
  logic [3:0] cfg_qbits;
  logic [1:0] cfg_grp [N];
  logic [3:0] cfg_alpha [NG];
  logic signed [39:0] res_x_int;
  logic [4:0] res_s;
  logic [3:0] res_iters;
  logic [N/2-1:0] res_relu;

  quark_top dut (
    .clk, .rst_n, .pe_en, .pe_we, .pe_addr, .pe_wdata, .pe_rdata,
    .cmd_valid, .cmd_ready, .cmd_mode, .cmd_n, .cmd_src, .cmd_dst, .cmd_quant,
    .cfg_qmax, .cfg_qmin, .cfg_qbits, .cfg_grp, .cfg_alpha,
    .done, .res_x_int, .res_s, .res_sqrt_iters(res_iters), .res_relu_sel(res_relu));

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string s);
    failures++;
    if (failures < 12) $display("%s", s);
  endtask

  task automatic pe_write(int addr, logic signed [15:0] v [N]);
    @(negedge clk);
    pe_en = 1; pe_we = 1; pe_addr = 4'(addr);
    for (int i = 0; i < N; i++) pe_wdata[i] = v[i];
    @(negedge clk);
    pe_en = 0; pe_we = 0;
  endtask

  task automatic pe_read(int addr, output logic signed [15:0] v [N]);
    @(negedge clk);
    pe_en = 1; pe_we = 0; pe_addr = 4'(addr);
    @(negedge clk);
    pe_en = 0;
    for (int i = 0; i < N; i++) v[i] = pe_rdata[i];
  endtask

  task automatic run(mode_e m, int n, int src, int dst, bit quant);
    @(negedge clk);
    cmd_valid = 1; cmd_mode = m; cmd_n = 9'(n); cmd_src = 4'(src); cmd_dst = 4'(dst); cmd_quant = quant;
    @(negedge clk);
    cmd_valid = 0;
    while (!done) @(negedge clk);
  endtask

  initial begin
    logic signed [15:0] xin [N], y [N], yq [N];
    real rx [N];
    real s, mu, vr, want, got;
    int nq;
    rst_n = 0; pe_en = 0; pe_we = 0; pe_addr = 0; cmd_valid = 0; cmd_quant = 0;
    cmd_mode = MODE_SOFTMAX; cmd_n = 0; cmd_src = 0; cmd_dst = 0;
    for (int i = 0; i < N; i++) begin pe_wdata[i] = 0; cfg_grp[i] = 2'(i / (N / NG)); end
    for (int g = 0; g < NG; g++) cfg_alpha[g] = 4'(g);
    cfg_qmax = 16'sd256; cfg_qmin = 16'sd0; cfg_qbits = 4'd8;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // Softmax over 197 tokens
    for (int i = 0; i < N; i++) begin
      xin[i] = 16'($signed($urandom_range(0, 1536)) - 768);
      if (i == 5) xin[i] = 16'sd1024;   // one dominant attention score
      rx[i] = real'(xin[i]) / 256.0;
    end
    pe_write(0, xin);
    run(MODE_SOFTMAX, 197, 0, 1, 0);
    pe_read(1, y);
    s = 0.0;
    for (int i = 0; i < 197; i++) s += $exp(rx[i]);
    for (int i = 0; i < N; i++) begin
      want = (i < 197) ? $exp(rx[i]) / s : 0.0;
      got = real'(y[i]) / 256.0;
      checks++;
      if (absr(got - want) > 0.02) fail($sformatf("softmax %0d got %f want %f", i, got, want));
    end

    // GELU over 192 activations
    for (int i = 0; i < N; i++) begin
      xin[i] = 16'($signed($urandom_range(0, 2048)) - 1024);
      rx[i] = real'(xin[i]) / 256.0;
    end
    pe_write(2, xin);
    run(MODE_GELU, 192, 2, 3, 0);
    pe_read(3, y);
    for (int k = 0; k < N; k++) begin
      if (k >= 192) want = 0.0;
      else if (xin[k] >= 615 || xin[k] <= -615) want = (rx[k] > 0.0) ? rx[k] : 0.0;
      else want = rx[k] / (1.0 + $exp(-1.702 * rx[k]));
      got = real'(y[k]) / 256.0;
      checks++;
      if (absr(got - want) > 0.03 + 0.03 * absr(want)) fail($sformatf("gelu %0d got %f want %f", k, got, want));
    end

    // LayerNorm over 384 channels
    for (int i = 0; i < N; i++) begin
      xin[i] = 16'($signed($urandom_range(0, 1024)) - 512);
      rx[i] = real'(xin[i]) / 256.0;
    end
    pe_write(4, xin);
    run(MODE_LN, 384, 4, 5, 0);
    pe_read(5, y);
    mu = 0.0; vr = 0.0;
    for (int i = 0; i < N; i++) mu += rx[i];
    mu /= real'(N);
    for (int i = 0; i < N; i++) vr += (rx[i] - mu) ** 2;
    vr /= real'(N);
    for (int i = 0; i < N; i++) begin
      want = (rx[i] - mu) / $sqrt(vr);
      got = real'(y[i]) / 256.0;
      checks++;
      if (absr(got - want) > 0.15 * absr(want) + 0.08) fail($sformatf("LN %0d got %f want %f", i, got, want));
    end
    checks++;
    if (res_iters > 10) fail("square root over ten iterations");

    // Softmax again, written back as 8-bit group codes
    run(MODE_SOFTMAX, 197, 0, 6, 1);
    pe_read(6, yq);
    pe_read(1, y);
    nq = 0;
    for (int i = 0; i < N; i++) begin
      longint e, sh, r;
      sh = cfg_alpha[cfg_grp[i]];     // S = 2^(8 - 8) = 1 LSB
      r = (sh == 0) ? longint'(y[i]) : ((longint'(y[i]) + (64'sd1 << (sh - 1))) >>> sh);
      e = (i >= 197 || r <= 0) ? 0 : (r > 255) ? 255 : r;
      checks++;
      if (longint'(yq[i]) != e) fail($sformatf("code %0d got %0d exp %0d", i, yq[i], e));
      if (e != 0) nq++;
    end
    checks++;
    if (nq == 0) fail("no nonzero codes");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
