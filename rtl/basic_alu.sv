// basic_alu: the basic arithmetic primitives of the coarse grained layer.
//
// Besides dedicated operators such as the 3x3 convolution, a PE offers the basic
// operations add, subtract, multiply, divide and compare. Each works on one pixel a (the
// centre pixel of the current window) and the constant k of the active context, so a PE
// can do per-sample signal compensation (offset, gain) and thresholding. Results are
// saturated to the signed pixel range. Multiply is scaled by an arithmetic right shift
// (a fixed-point gain). Divide truncates toward zero; division by zero gives the largest
// value of a's sign. Compare gives 1 when a > k and 0 otherwise.
//
// Interface: op, a, k, shift in; y out. Timing: combinational, one result per clock once
// registered by the PE. The list of operations follows the architecture; how each one
// uses its operands (a pixel and a context constant), the scaling and the saturation
// rules are choices of this design.
module basic_alu
  import pe_pkg::*;
(
  input  opcode_e             op,
  input  pix_t                a,
  input  pix_t                k,
  input  logic [SHIFT_W-1:0]  shift,
  output pix_t                y
);

  logic signed [2*PIX_W-1:0] prod;
  logic signed [PIX_W:0]     quot;

  always_comb begin
    prod = (2*PIX_W)'(a) * (2*PIX_W)'(k);
    quot = '0;
    if (k != '0) quot = (PIX_W+1)'(a) / (PIX_W+1)'(k);
    unique case (op)
      OP_ADD:  y = sat_pix(64'(a) + 64'(k));
      OP_SUB:  y = sat_pix(64'(a) - 64'(k));
      OP_MUL:  y = sat_pix(64'(prod >>> shift));
      OP_DIV:  y = (k == '0) ? (a[PIX_W-1] ? PIX_MIN : PIX_MAX) : sat_pix(64'(quot));
      OP_CMP:  y = (a > k) ? pix_t'(1) : pix_t'(0);
      default: y = a;
    endcase
  end

endmodule
