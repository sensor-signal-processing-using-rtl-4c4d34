// pe: one processing element of the sensor processing array.
//
// A PE stacks three of the architecture's layers. The fine grained layer is the frame
// controller (pe_fsmd) with the line-buffer window datapath (window_gen). The coarse
// grained function definition layer holds the operation primitives: the 3x3 convolution
// as a single operator (conv3x3_op) and the basic add/subtract/multiply/divide/compare
// primitives (basic_alu). The dynamic contexts (context_regs) choose which primitive runs
// and with which coefficients and constants. The fourth layer, the bypass switches, sits
// outside the PE (bypass_switch).
//
// Streams: in_* and out_* are valid/ready streams of signed pixels; a word moves when
// valid and ready are both high. The PE accepts pixels only while a frame runs, and only
// when its single output register is empty or being emptied, so a stalled consumer stalls
// the whole PE. For each pixel whose 3x3 window lies inside the frame it writes one result,
// one clock after the pixel was accepted: throughput is one pixel per clock, latency one
// clock, and a W x H frame yields (W-2) x (H-2) results in raster order. Basic operations
// act on the window's centre pixel, so they yield the same frame geometry.
//
// Configuration: cfg_we/cfg_ctx/cfg_reg/cfg_wdata write a context word; ctx_sel chooses
// the context for the next frame, latched at start. The output register, the
// handshake and the frame protocol are this design's choices.
module pe
  import pe_pkg::*;
#(
  parameter int unsigned MAX_W = 640,
  parameter int unsigned MAX_H = 480,
  parameter int unsigned N_CTX = 4,
  localparam int unsigned DIMW_W = $clog2(MAX_W + 1),
  localparam int unsigned DIMH_W = $clog2(MAX_H + 1),
  localparam int unsigned CTX_IDX_W = (N_CTX > 1) ? $clog2(N_CTX) : 1
)(
  input  logic                  clk,
  input  logic                  rst_n,
  // frame control
  input  logic                  start,
  input  logic                  enable,
  input  logic [DIMW_W-1:0]     img_w,
  input  logic [DIMH_W-1:0]     img_h,
  input  logic [CTX_IDX_W-1:0]  ctx_sel,
  output logic                  busy,
  output logic                  done,
  // context configuration
  input  logic                  cfg_we,
  input  logic [CTX_IDX_W-1:0]  cfg_ctx,
  input  logic [3:0]            cfg_reg,
  input  logic [CFG_DATA_W-1:0] cfg_wdata,
  // pixel streams
  input  logic                  in_valid,
  input  pix_t                  in_data,
  output logic                  in_ready,
  output logic                  out_valid,
  output pix_t                  out_data,
  input  logic                  out_ready
);

  localparam int unsigned COL_W = $clog2(MAX_W);

  logic                 run, accept, win_ok;
  logic [COL_W-1:0]     col;
  logic [CTX_IDX_W-1:0] ctx_q;
  context_t             ctx;
  window_t              win;
  pix_t                 conv_y, alu_y, result;

  assign in_ready = run && (!out_valid || out_ready);
  assign accept   = in_valid && in_ready;

  pe_fsmd #(.MAX_W(MAX_W), .MAX_H(MAX_H), .N_CTX(N_CTX)) u_fsmd (
    .clk, .rst_n, .start, .enable, .img_w, .img_h, .ctx_sel, .accept,
    .run, .col, .win_ok, .ctx_q, .busy, .done
  );

  context_regs #(.N_CTX(N_CTX)) u_ctx (
    .clk, .rst_n,
    .wr_en(cfg_we), .wr_ctx(cfg_ctx), .wr_reg(cfg_reg), .wr_data(cfg_wdata),
    .rd_ctx(ctx_q), .ctx
  );

  window_gen #(.MAX_W(MAX_W)) u_win (
    .clk, .rst_n, .shift_en(accept), .col, .pix_in(in_data), .win_next(win)
  );

  conv3x3_op u_conv (.win, .coef(ctx.coef), .shift(ctx.shift), .y(conv_y));

  basic_alu u_alu (.op(ctx.op), .a(win[4]), .k(ctx.k), .shift(ctx.shift), .y(alu_y));

  assign result = (ctx.op == OP_CONV) ? conv_y : alu_y;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_data  <= '0;
    end else if (accept && win_ok) begin
      out_valid <= 1'b1;
      out_data  <= result;
    end else if (out_ready) begin
      out_valid <= 1'b0;
    end
  end

  // A result waiting for the consumer is held unchanged.
  a_out_hold: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid && !out_ready |=> out_valid && $stable(out_data));

endmodule
