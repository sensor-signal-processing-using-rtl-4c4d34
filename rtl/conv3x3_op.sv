// conv3x3_op: the 3x3 convolution operator of the coarse grained function definition layer.
//
// The whole convolution is one operator, as the architecture proposes, instead of a chain of
// multiply and add primitives: it multiplies the nine pixels of a 3x3 window by nine signed
// coefficients, sums the products in a full-width accumulator, scales the sum by an arithmetic
// right shift and saturates it to the signed pixel range. Which filter it computes (Gaussian
// smoothing, Laplacian edge detection, ...) is only a matter of the coefficients and the
// shift, which come from the PE's active context.
//
// Interface: win (9 pixels, index r*3+c), coef (9 signed coefficients, same order),
// shift, y (result). Timing: purely combinational; the PE registers the result, so the
// operator delivers one result per clock. The coefficient width, the shift-based scaling
// and the saturation are choices of this design.
module conv3x3_op
  import pe_pkg::*;
(
  input  window_t             win,
  input  coefs_t              coef,
  input  logic [SHIFT_W-1:0]  shift,
  output pix_t                y
);

  logic signed [ACC_W-1:0] acc;
  logic signed [ACC_W-1:0] scaled;

  always_comb begin
    acc = '0;
    for (int i = 0; i < int'(N_TAPS); i++) begin
      acc += ACC_W'(win[i]) * ACC_W'(coef[i]);
    end
    scaled = acc >>> shift;
    y      = sat_pix(64'(scaled));
  end

endmodule
