// pe_array_top: a chain of sensor processing elements with a layered architecture.
//
// The array is built from four layers. At the bottom the I/O circuitry (sensor_io) turns
// raw 8/12/14/16-bit sensor samples into a pixel stream. Above it each PE has a fine
// grained layer (frame controller and line-buffer window) and a coarse grained function
// definition layer (the 3x3 convolution operator and basic arithmetic primitives, chosen
// by dynamic contexts). On top, the bypass connection layer puts one bypass switch beside
// every PE: the stream runs from the sensor through PE 0, PE 1, ... to the output, each PE
// either processing it or being bypassed. With two PEs the array computes, for example, a
// Gaussian smoothing followed by a Laplacian edge filter, or either filter alone.
//
// Ports: sensor_* is the raw sample stream, out_* the result stream (valid/ready, one word
// per clock). cfg_we/cfg_addr/cfg_wdata write configuration words, one per clock:
//   cfg_addr[11] = 0: context word; [10:8] PE, [7:4] context, [3:0] word
//                     (0..8 coefficients, 9 shift, 10 opcode, 11 constant k)
//   cfg_addr[11] = 1: control word; [7:0] = 0x00 sensor width (sensor_fmt_e),
//                     0x10 + 4*PE + {0: frame width, 1: frame height, 2: context, 3: bypass}
// start begins a frame in every PE that is not bypassed, each with its own frame size and
// context; pe_busy and pe_done (a one-clock pulse per PE) report progress. A processing PE
// shrinks a W x H frame to (W-2) x (H-2), so the frame size written for a PE is the size
// of the stream that reaches it. Control words should be changed only between frames.
//
// Sizes: N_PE PEs (2), N_CTX contexts each (4), frames up to MAX_W x MAX_H (640 x 480).
// The architecture names the layers, the operator kinds, the bypass switches between
// neighbouring PEs and the sensor widths; the counts, frame sizes, stream handshake and
// register map are this design's choices.
module pe_array_top
  import pe_pkg::*;
#(
  parameter int unsigned N_PE  = 2,
  parameter int unsigned N_CTX = 4,
  parameter int unsigned MAX_W = 640,
  parameter int unsigned MAX_H = 480,
  localparam int unsigned DIMW_W = $clog2(MAX_W + 1),
  localparam int unsigned DIMH_W = $clog2(MAX_H + 1),
  localparam int unsigned CTX_IDX_W = (N_CTX > 1) ? $clog2(N_CTX) : 1
)(
  input  logic                  clk,
  input  logic                  rst_n,
  // raw sensor samples (from the mixed-signal front end)
  input  logic                  sensor_valid,
  input  logic [SENSOR_W-1:0]   sensor_data,
  output logic                  sensor_ready,
  // configuration bus
  input  logic                  cfg_we,
  input  logic [CFG_ADDR_W-1:0] cfg_addr,
  input  logic [CFG_DATA_W-1:0] cfg_wdata,
  // frame control and status
  input  logic                  start,
  output logic [N_PE-1:0]       pe_busy,
  output logic [N_PE-1:0]       pe_done,
  // result stream
  output logic                  out_valid,
  output pix_t                  out_data,
  input  logic                  out_ready
);

  // ---------------- control registers ----------------
  sensor_fmt_e            fmt_q;
  logic [DIMW_W-1:0]      img_w_q   [N_PE];
  logic [DIMH_W-1:0]      img_h_q   [N_PE];
  logic [CTX_IDX_W-1:0]   ctx_sel_q [N_PE];
  logic [N_PE-1:0]        bypass_q;

  logic       ctl_we;
  logic [7:0] ctl_idx;
  assign ctl_we  = cfg_we && cfg_addr[11];
  assign ctl_idx = cfg_addr[7:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fmt_q    <= FMT_16;
      bypass_q <= '0;
      for (int p = 0; p < int'(N_PE); p++) begin
        img_w_q[p]   <= '0;
        img_h_q[p]   <= '0;
        ctx_sel_q[p] <= '0;
      end
    end else if (ctl_we) begin
      if (ctl_idx == 8'h00) fmt_q <= sensor_fmt_e'(cfg_wdata[1:0]);
      for (int p = 0; p < int'(N_PE); p++) begin
        if (32'(ctl_idx) == 32'h10 + 4*p)     img_w_q[p]   <= cfg_wdata[DIMW_W-1:0];
        if (32'(ctl_idx) == 32'h10 + 4*p + 1) img_h_q[p]   <= cfg_wdata[DIMH_W-1:0];
        if (32'(ctl_idx) == 32'h10 + 4*p + 2) ctx_sel_q[p] <= cfg_wdata[CTX_IDX_W-1:0];
        if (32'(ctl_idx) == 32'h10 + 4*p + 3) bypass_q[p]  <= cfg_wdata[0];
      end
    end
  end

  // ---------------- I/O circuitry layer ----------------
  // Stream s[p] enters the switch of PE p; s[N_PE] is the array output.
  logic         s_valid [N_PE+1];
  pix_t         s_data  [N_PE+1];
  logic         s_ready [N_PE+1];

  sensor_io u_io (
    .clk, .rst_n, .fmt(fmt_q),
    .raw_valid(sensor_valid), .raw_data(sensor_data), .raw_ready(sensor_ready),
    .out_valid(s_valid[0]), .out_data(s_data[0]), .out_ready(s_ready[0])
  );

  // ---------------- PEs and bypass connection layer ----------------
  for (genvar p = 0; p < int'(N_PE); p++) begin : g_pe
    logic pe_in_valid, pe_in_ready, pe_out_valid, pe_out_ready;
    pix_t pe_in_data, pe_out_data;
    logic ctx_we;

    assign ctx_we = cfg_we && !cfg_addr[11] && (32'(cfg_addr[10:8]) == p);

    pe #(.MAX_W(MAX_W), .MAX_H(MAX_H), .N_CTX(N_CTX)) u_pe (
      .clk, .rst_n,
      .start, .enable(!bypass_q[p]),
      .img_w(img_w_q[p]), .img_h(img_h_q[p]), .ctx_sel(ctx_sel_q[p]),
      .busy(pe_busy[p]), .done(pe_done[p]),
      .cfg_we(ctx_we), .cfg_ctx(cfg_addr[4 +: CTX_IDX_W]), .cfg_reg(cfg_addr[3:0]),
      .cfg_wdata,
      .in_valid(pe_in_valid), .in_data(pe_in_data), .in_ready(pe_in_ready),
      .out_valid(pe_out_valid), .out_data(pe_out_data), .out_ready(pe_out_ready)
    );

    bypass_switch u_sw (
      .bypass(bypass_q[p]),
      .up_valid(s_valid[p]), .up_data(s_data[p]), .up_ready(s_ready[p]),
      .pe_in_valid, .pe_in_data, .pe_in_ready,
      .pe_out_valid, .pe_out_data, .pe_out_ready,
      .dn_valid(s_valid[p+1]), .dn_data(s_data[p+1]), .dn_ready(s_ready[p+1])
    );
  end

  assign out_valid        = s_valid[N_PE];
  assign out_data         = s_data[N_PE];
  assign s_ready[N_PE]    = out_ready;

endmodule
