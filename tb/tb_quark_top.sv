// tb_quark_top: end-to-end test of the nonlinear unit behind its shared
// buffer, on a 16-lane, 8-word instance.  The testbench plays the PE array:
// it writes random rows through buffer port A, issues Softmax / GELU /
// LayerNorm commands, and reads the results back through port A.  Each row is
// run twice, once written as Q8.8 and once written as group-quantized codes;
// the Q8.8 result is checked against real-valued math and the codes are
// checked bit for bit against the quantization rule applied to that result.
// Command latency is checked (unit latency + 5 cycles).  The mechanisms of
// the design are counted and each must occur: all three modes, the ReLU
// branch of GELU, masked lanes, early and capped square-root stops,
// quantized write-back, clipping, and PE-port traffic during a command.
module tb_quark_top;
  import quark_pkg::*;
  import quark_ref_pkg::*;
  int checks = 0, failures = 0;
  logic clk = 0;
  always #5 clk = ~clk;

  localparam int N = 16, D = 8, NG = 4;
  logic rst_n;
  logic pe_en, pe_we;
  logic [2:0] pe_addr;
  logic [15:0] pe_wdata [N], pe_rdata [N];
  logic cmd_valid, cmd_ready, cmd_quant, done;
  mode_e cmd_mode;
  logic [4:0] cmd_n;
  logic [2:0] cmd_src, cmd_dst;
  logic signed [15:0] cfg_qmax, cfg_qmin;
  logic [3:0] cfg_qbits;
  logic [1:0] cfg_grp [N];
  logic [3:0] cfg_alpha [NG];
  logic signed [39:0] res_x_int;
  logic [4:0] res_s;
  logic [3:0] res_iters;
  logic [N/2-1:0] res_relu;

  quark_top #(.N(N), .DEPTH(D), .NG(NG), .QW(8)) dut (
    .clk, .rst_n, .pe_en, .pe_we, .pe_addr, .pe_wdata, .pe_rdata,
    .cmd_valid, .cmd_ready, .cmd_mode, .cmd_n, .cmd_src, .cmd_dst, .cmd_quant,
    .cfg_qmax, .cfg_qmin, .cfg_qbits, .cfg_grp, .cfg_alpha,
    .done, .res_x_int, .res_s, .res_sqrt_iters(res_iters), .res_relu_sel(res_relu));

  // mechanism counters
  int c_mode [3] = '{0, 0, 0};
  int c_relu = 0, c_mask = 0, c_sq_early = 0, c_sq_cap = 0, c_quant = 0, c_clip = 0, c_pe = 0;

  initial begin
    repeat (400000) @(posedge clk);
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
    pe_en = 1; pe_we = 1; pe_addr = 3'(addr);
    for (int i = 0; i < N; i++) pe_wdata[i] = v[i];
    @(negedge clk);
    pe_en = 0; pe_we = 0;
  endtask

  task automatic pe_read(int addr, output logic signed [15:0] v [N]);
    @(negedge clk);
    pe_en = 1; pe_we = 0; pe_addr = 3'(addr);
    @(negedge clk);
    pe_en = 0;
    for (int i = 0; i < N; i++) v[i] = pe_rdata[i];
  endtask

  // run one command; returns the cycle count from acceptance to done
  task automatic run(mode_e m, int n, int src, int dst, bit quant, output int cyc);
    logic [15:0] junk [N];
    @(negedge clk);
    cmd_valid = 1; cmd_mode = m; cmd_n = 5'(n); cmd_src = 3'(src); cmd_dst = 3'(dst); cmd_quant = quant;
    checks++;
    if (!cmd_ready) fail("command not accepted");
    @(negedge clk);
    cmd_valid = 0;
    cyc = 1;
    // the PE array keeps using port A on another word meanwhile
    pe_en = 1; pe_we = 0; pe_addr = 3'(7); c_pe++;
    while (!done) begin @(negedge clk); cyc++; end
    pe_en = 0;
    junk = pe_rdata;
  endtask

  initial begin
    logic signed [15:0] xin [N], yraw [N], yq [N];
    real rx [N];
    real s, mu, vr, want, got, sg;
    int m, n, cyc1, cyc2, nl_lat;
    longint rng, sc, sh, r, lim, sum;
    int c;
    rst_n = 0; pe_en = 0; pe_we = 0; pe_addr = 0; cmd_valid = 0; cmd_quant = 0;
    cmd_mode = MODE_SOFTMAX; cmd_n = 0; cmd_src = 0; cmd_dst = 0;
    for (int i = 0; i < N; i++) begin pe_wdata[i] = 0; cfg_grp[i] = 2'(i / (N / NG)); end
    for (int g = 0; g < NG; g++) cfg_alpha[g] = 4'(g);
    cfg_qmax = 16'sd200; cfg_qmin = -16'sd56; cfg_qbits = 4'd4;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 240; t++) begin
      m = t % 3;
      n = (m == 1) ? $urandom_range(1, N/2) : $urandom_range(4, N);
      if (t % 5 == 0) n = (m == 1) ? N/2 : N;
      for (int i = 0; i < N; i++) begin
        xin[i] = 16'($signed($urandom_range(0, 1600)) - 800);
        if (m == 2 && t % 12 == 2) xin[i] = 16'($signed($urandom_range(0, 16000)) - 8000);  // wide rows
        rx[i] = real'(xin[i]) / 256.0;
      end
      cfg_qbits = 4'($urandom_range(3, 8));
      pe_write(t % 3, xin);
      run(mode_e'(m), n, t % 3, 3 + t % 2, 0, cyc1);
      nl_lat = (m == 2) ? int'(res_iters) + 7 : 2;
      checks++;
      if (cyc1 != nl_lat + 5) fail($sformatf("mode %0d command latency %0d, unit %0d", m, cyc1, nl_lat));
      c_mode[m]++;
      if (n < ((m == 1) ? N/2 : N)) c_mask++;
      if (m == 2) begin if (res_iters < 10) c_sq_early++; else c_sq_cap++; end
      pe_read(3 + t % 2, yraw);
      // real-valued reference
      case (m)
        0: begin
          s = 0.0;
          for (int i = 0; i < n; i++) s += $exp(rx[i]);
          for (int i = 0; i < N; i++) begin
            want = (i < n) ? $exp(rx[i]) / s : 0.0;
            got = real'(yraw[i]) / 256.0;
            checks++;
            if (absr(got - want) > 0.03) fail($sformatf("softmax got %f want %f", got, want));
          end
        end
        1: begin
          for (int k = 0; k < N; k++) begin
            if (k >= n) want = 0.0;
            else if (xin[k] >= 615 || xin[k] <= -615) begin
              want = (rx[k] > 0.0) ? rx[k] : 0.0;
              c_relu++;
            end else begin
              sg = 1.0 / (1.0 + $exp(-1.702 * rx[k]));
              want = rx[k] * sg;
            end
            got = real'(yraw[k]) / 256.0;
            checks++;
            if (absr(got - want) > 0.03 + 0.03 * absr(want)) fail($sformatf("gelu got %f want %f", got, want));
          end
        end
        default: begin
          mu = 0.0; vr = 0.0;
          for (int i = 0; i < n; i++) mu += rx[i];
          mu /= real'(n);
          for (int i = 0; i < n; i++) vr += (rx[i] - mu) ** 2;
          vr /= real'(n);
          for (int i = 0; i < N; i++) begin
            want = (i < n) ? (rx[i] - mu) / $sqrt(vr) : 0.0;
            got = real'(yraw[i]) / 256.0;
            checks++;
            if (absr(got - want) > 0.25 * absr(want) + 0.10) fail($sformatf("LN got %f want %f", got, want));
          end
        end
      endcase
      // same row again, written back as group-quantized codes
      run(mode_e'(m), n, t % 3, 5, 1, cyc2);
      c_quant++;
      pe_read(5, yq);
      rng = longint'(cfg_qmax) - longint'(cfg_qmin);
      c = 0;
      while ((64'sd1 << c) < rng) c++;
      sc  = (c > cfg_qbits) ? c - cfg_qbits : 0;
      lim = (64'sd1 << cfg_qbits) - 1;
      sum = 0;
      for (int i = 0; i < N; i++) begin
        longint e;
        sh = sc + cfg_alpha[cfg_grp[i]];
        r  = (sh == 0) ? longint'(yraw[i]) : ((longint'(yraw[i]) + (64'sd1 << (sh - 1))) >>> sh);
        if (i >= n || r <= 0) e = 0;
        else if (r >= lim) begin e = lim; if (r > lim) c_clip++; end
        else e = r;
        sum += e << cfg_alpha[cfg_grp[i]];
        checks++;
        if (longint'(yq[i]) != e) fail($sformatf("code lane %0d got %0d exp %0d", i, yq[i], e));
      end
      checks++;
      if (longint'(res_x_int) != (sum << sc)) fail($sformatf("x_int got %0d exp %0d", res_x_int, sum << sc));
    end
    $display("softmax %0d gelu %0d layernorm %0d relu-lanes %0d masked %0d sqrt-early %0d sqrt-cap %0d quant %0d clip %0d pe-port %0d",
             c_mode[0], c_mode[1], c_mode[2], c_relu, c_mask, c_sq_early, c_sq_cap, c_quant, c_clip, c_pe);
    checks += 10;
    if (c_mode[0] == 0) failures++;
    if (c_mode[1] == 0) failures++;
    if (c_mode[2] == 0) failures++;
    if (c_relu == 0) failures++;
    if (c_mask == 0) failures++;
    if (c_sq_early == 0) failures++;
    if (c_sq_cap == 0) failures++;
    if (c_quant == 0) failures++;
    if (c_clip == 0) failures++;
    if (c_pe == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
