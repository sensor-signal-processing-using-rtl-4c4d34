// context_regs: the dynamic contexts of one PE.
//
// A dynamic context is a register set together with an instruction: here the nine
// convolution coefficients, a shift, a constant k and an opcode. The PE holds N_CTX of
// them. The configuration bus writes one word at a time (wr_ctx picks the context,
// wr_reg the word: 0..8 coefficients, 9 shift, 10 opcode, 11 k); the PE's controller
// picks the context it runs with (rd_ctx), so a new context can be loaded while another
// one is running and the PE switches between them at the next frame. Writes to unused
// register indexes or contexts are ignored; an opcode value outside the defined ones is
// stored as OP_CONV.
//
// Timing: a write takes effect at the next clock; the read port is combinational. All
// contexts reset to zero (a convolution with all-zero coefficients). The number of
// contexts (m in the architecture's description) is left open there; 4 is this design's choice.
module context_regs
  import pe_pkg::*;
#(
  parameter int unsigned N_CTX = 4,
  localparam int unsigned CTX_IDX_W = (N_CTX > 1) ? $clog2(N_CTX) : 1
)(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  wr_en,
  input  logic [CTX_IDX_W-1:0]  wr_ctx,
  input  logic [3:0]            wr_reg,
  input  logic [CFG_DATA_W-1:0] wr_data,
  input  logic [CTX_IDX_W-1:0]  rd_ctx,
  output context_t              ctx
);

  context_t ctx_q [N_CTX];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < int'(N_CTX); i++) ctx_q[i] <= '0;
    end else if (wr_en && (32'(wr_ctx) < N_CTX)) begin
      if (32'(wr_reg) < N_TAPS) begin
        ctx_q[wr_ctx].coef[wr_reg] <= coef_t'(wr_data[COEF_W-1:0]);
      end else if (32'(wr_reg) == CTX_REG_SHIFT) begin
        ctx_q[wr_ctx].shift <= wr_data[SHIFT_W-1:0];
      end else if (32'(wr_reg) == CTX_REG_OP) begin
        ctx_q[wr_ctx].op <= (wr_data[2:0] <= 3'(OP_CMP)) ? opcode_e'(wr_data[2:0]) : OP_CONV;
      end else if (32'(wr_reg) == CTX_REG_K) begin
        ctx_q[wr_ctx].k <= pix_t'(wr_data);
      end
    end
  end

  assign ctx = (32'(rd_ctx) < N_CTX) ? ctx_q[rd_ctx] : '0;

endmodule
