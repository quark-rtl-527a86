// quark_top: a QUARK nonlinear unit attached to a shared buffer.
//
// The host accelerator's PE array (not part of this design) writes rows of
// Q8.8 activations into the shared buffer through port A and issues a command
// naming an operation (Softmax, GELU or LayerNorm), the source and destination
// words, the number of valid lanes and whether the result is to be quantized.
// A small command controller then time-multiplexes the one nonlinear unit:
//   read the source word (port B) -> run quark_nonlinear_unit ->
//   run group_quant_unit -> write the destination word (port B).
// The destination receives either the Q8.8 result or, with cmd_quant, the
// group-quantized codes zero-extended to 16 bits.  res_x_int / res_s give the
// cross-group-aligned sum and the scale exponent of the last command.
//
// Interface: cmd_valid/cmd_ready handshake; done pulses for one cycle when the
// destination has been written.  Buffer port A is free for the PE array at all
// times.  The command format and the controller are this design's; the paper
// only names the shared buffer and the time-division multiplexing.
module quark_top
  import quark_pkg::*;
#(
  parameter int N     = 384,
  parameter int DEPTH = 16,
  parameter int NG    = 4,
  parameter int QW    = 8
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // PE array side of the shared buffer
  input  logic                         pe_en,
  input  logic                         pe_we,
  input  logic [$clog2(DEPTH)-1:0]     pe_addr,
  input  logic [DATA_W-1:0]            pe_wdata [N],
  output logic [DATA_W-1:0]            pe_rdata [N],
  // command
  input  logic                         cmd_valid,
  output logic                         cmd_ready,
  input  mode_e                        cmd_mode,
  input  logic [$clog2(N+1)-1:0]       cmd_n,
  input  logic [$clog2(DEPTH)-1:0]     cmd_src,
  input  logic [$clog2(DEPTH)-1:0]     cmd_dst,
  input  logic                         cmd_quant,
  // group quantization configuration (offline calibration)
  input  logic signed [DATA_W-1:0]     cfg_qmax,
  input  logic signed [DATA_W-1:0]     cfg_qmin,
  input  logic [3:0]                   cfg_qbits,
  input  logic [$clog2(NG)-1:0]        cfg_grp [N],
  input  logic [3:0]                   cfg_alpha [NG],
  // status
  output logic                         done,
  output logic signed [ACC_W-1:0]      res_x_int,
  output logic [4:0]                   res_s,
  output logic [3:0]                   res_sqrt_iters,
  output logic [N/2-1:0]               res_relu_sel
);

  localparam int NW = $clog2(N+1);
  localparam int AW = $clog2(DEPTH);

  typedef enum logic [2:0] {C_IDLE, C_READ, C_RUN, C_WAIT, C_QUANT, C_WRITE} cstate_e;
  cstate_e cst;

  mode_e            mode_r;
  logic [NW-1:0]    n_r;
  logic [AW-1:0]    src_r, dst_r;
  logic             quant_r;

  logic             b_en, b_we;
  logic [AW-1:0]    b_addr;
  logic [DATA_W-1:0] b_wdata [N];
  logic [DATA_W-1:0] b_rdata [N];

  logic signed [DATA_W-1:0] nl_x [N];
  logic signed [DATA_W-1:0] nl_y [N];
  logic             nl_in_valid, nl_in_ready, nl_out_valid;
  logic [N-1:0]     lane_en;

  logic             gq_in_valid, gq_out_valid;
  logic [QW-1:0]    gq_q [N];
  logic signed [ACC_W-1:0] gq_x_int;
  logic [4:0]       gq_s;

  shared_buffer #(.N(N), .W(DATA_W), .DEPTH(DEPTH)) u_buf (
    .clk,
    .a_en(pe_en), .a_we(pe_we), .a_addr(pe_addr), .a_wdata(pe_wdata), .a_rdata(pe_rdata),
    .b_en, .b_we, .b_addr, .b_wdata, .b_rdata
  );

  always_comb
    for (int i = 0; i < N; i++) nl_x[i] = signed'(b_rdata[i]);

  quark_nonlinear_unit #(.N(N)) u_nl (
    .clk, .rst_n, .in_valid(nl_in_valid), .in_ready(nl_in_ready), .mode(mode_r),
    .x(nl_x), .n(n_r), .out_valid(nl_out_valid), .y(nl_y),
    .relu_sel(res_relu_sel), .sqrt_iters(res_sqrt_iters)
  );

  // lanes holding results: n lanes, of which GELU returns its n in lanes 0..n-1
  always_comb
    for (int i = 0; i < N; i++) lane_en[i] = (i < int'(n_r));

  group_quant_unit #(.N(N), .NG(NG), .QW(QW)) u_gq (
    .clk, .rst_n, .in_valid(gq_in_valid), .x(nl_y), .lane_en(lane_en),
    .qmax(cfg_qmax), .qmin(cfg_qmin), .qbits(cfg_qbits), .lane_grp(cfg_grp),
    .alpha(cfg_alpha), .out_valid(gq_out_valid), .q(gq_q), .x_int(gq_x_int), .s(gq_s)
  );

  assign cmd_ready   = (cst == C_IDLE);
  assign nl_in_valid = (cst == C_RUN);
  assign gq_in_valid = (cst == C_WAIT) && nl_out_valid;

  always_comb begin
    b_en   = 1'b0;
    b_we   = 1'b0;
    b_addr = src_r;
    for (int i = 0; i < N; i++)
      b_wdata[i] = quant_r ? DATA_W'(gq_q[i]) : nl_y[i];
    if (cst == C_READ) begin
      b_en = 1'b1;
    end else if (cst == C_WRITE) begin
      b_en   = 1'b1;
      b_we   = 1'b1;
      b_addr = dst_r;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cst       <= C_IDLE;
      mode_r    <= MODE_SOFTMAX;
      n_r       <= '0;
      src_r     <= '0;
      dst_r     <= '0;
      quant_r   <= 1'b0;
      done      <= 1'b0;
      res_x_int <= '0;
      res_s     <= '0;
    end else begin
      done <= 1'b0;
      case (cst)
        C_IDLE: if (cmd_valid) begin
          mode_r  <= cmd_mode;
          n_r     <= cmd_n;
          src_r   <= cmd_src;
          dst_r   <= cmd_dst;
          quant_r <= cmd_quant;
          cst     <= C_READ;
        end
        C_READ:  cst <= C_RUN;                      // buffer data valid next cycle
        C_RUN:   if (nl_in_ready) cst <= C_WAIT;    // unit takes the row
        C_WAIT:  if (nl_out_valid) cst <= C_QUANT;  // quantizer samples this cycle
        C_QUANT: if (gq_out_valid) begin
          res_x_int <= gq_x_int;
          res_s     <= gq_s;
          cst       <= C_WRITE;
        end
        C_WRITE: begin
          done <= 1'b1;
          cst  <= C_IDLE;
        end
        default: cst <= C_IDLE;
      endcase
    end
  end

endmodule
