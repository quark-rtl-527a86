// shared_buffer: the vector buffer through which the nonlinear unit meets the
// PE array of the host accelerator (paper Sec. IV: the unit "connects to the
// PE array via a shared buffer").  The paper gives no organisation, so this
// is the simplest one that serves: DEPTH words of N lanes, two independent
// ports (A for the PE array, B for the nonlinear unit), synchronous read with
// one cycle of latency, write-first on the same port.  If both ports write
// the same word in the same cycle, port A wins.
module shared_buffer #(
  parameter int N     = 384,
  parameter int W     = 16,
  parameter int DEPTH = 16
) (
  input  logic                     clk,
  input  logic                     a_en,
  input  logic                     a_we,
  input  logic [$clog2(DEPTH)-1:0] a_addr,
  input  logic [W-1:0]             a_wdata [N],
  output logic [W-1:0]             a_rdata [N],
  input  logic                     b_en,
  input  logic                     b_we,
  input  logic [$clog2(DEPTH)-1:0] b_addr,
  input  logic [W-1:0]             b_wdata [N],
  output logic [W-1:0]             b_rdata [N]
);

  logic [N*W-1:0] mem [DEPTH];
  logic [N*W-1:0] a_flat, b_flat, a_q, b_q;

  always_comb
    for (int i = 0; i < N; i++) begin
      a_flat[i*W +: W] = a_wdata[i];
      b_flat[i*W +: W] = b_wdata[i];
      a_rdata[i]       = a_q[i*W +: W];
      b_rdata[i]       = b_q[i*W +: W];
    end

  always_ff @(posedge clk) begin
    if (b_en && b_we && !(a_en && a_we && a_addr == b_addr)) mem[b_addr] <= b_flat;
    if (a_en && a_we) mem[a_addr] <= a_flat;
  end

  always_ff @(posedge clk) begin
    if (a_en) a_q <= (a_we) ? a_flat : mem[a_addr];
    if (b_en) b_q <= (b_we) ? b_flat : mem[b_addr];
  end

endmodule
