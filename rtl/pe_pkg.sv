// pe_pkg: types and constants shared by the sensor processing-element (PE) array.
//
// The array processes a raster stream of sensor samples. A sample enters as an unsigned
// word of 8, 12, 14 or 16 bits (the sensor interface widths the design is built for) and
// is carried inside the PEs as a signed 18-bit pixel, so that filters with negative
// coefficients (edge detectors such as a Laplacian) keep their sign. The 18-bit internal
// width, the 8-bit signed coefficients, the opcode encoding and the context layout are
// choices of this design; the sensor widths and the 3x3 operator size come from the
// architecture it implements.
package pe_pkg;

  // Widest sensor interface supported (8, 12, 14 or 16 bits).
  localparam int unsigned SENSOR_W = 16;
  // Internal signed pixel word: 16-bit unsigned sample plus sign plus one guard bit.
  localparam int unsigned PIX_W    = 18;
  // Signed convolution coefficient width.
  localparam int unsigned COEF_W   = 8;
  // Right-shift amount used to scale operator results.
  localparam int unsigned SHIFT_W  = 5;
  // Taps of the 3x3 operator.
  localparam int unsigned N_TAPS   = 9;
  // Accumulator of the 3x3 operator: product PIX_W+COEF_W plus 4 bits for 9 terms.
  localparam int unsigned ACC_W    = PIX_W + COEF_W + 4;

  typedef logic signed [PIX_W-1:0]  pix_t;
  typedef logic signed [COEF_W-1:0] coef_t;

  // Window tap order: index r*3+c, r = 0 the oldest (top) row, c = 0 the oldest (left) column.
  typedef pix_t  [N_TAPS-1:0] window_t;
  typedef coef_t [N_TAPS-1:0] coefs_t;

  localparam pix_t PIX_MAX = pix_t'({1'b0, {(PIX_W-1){1'b1}}});
  localparam pix_t PIX_MIN = pix_t'({1'b1, {(PIX_W-1){1'b0}}});

  // Operation primitives of the coarse grained layer.
  typedef enum logic [2:0] {
    OP_CONV = 3'd0,  // 3x3 convolution of the window with the context's coefficients
    OP_ADD  = 3'd1,  // centre pixel + k
    OP_SUB  = 3'd2,  // centre pixel - k
    OP_MUL  = 3'd3,  // (centre pixel * k) >>> shift
    OP_DIV  = 3'd4,  // centre pixel / k (truncating; k = 0 saturates)
    OP_CMP  = 3'd5   // 1 if centre pixel > k, else 0
  } opcode_e;

  // Sensor interface width selection.
  typedef enum logic [1:0] {
    FMT_8  = 2'd0,
    FMT_12 = 2'd1,
    FMT_14 = 2'd2,
    FMT_16 = 2'd3
  } sensor_fmt_e;

  // One dynamic context: a register set (coefficients, shift, constant) and an instruction.
  typedef struct packed {
    opcode_e              op;
    logic [SHIFT_W-1:0]   shift;
    pix_t                 k;
    coefs_t               coef;
  } context_t;

  // Register index of a context word on the configuration bus.
  localparam int unsigned CTX_REG_SHIFT = 9;   // 0..8 are the coefficients
  localparam int unsigned CTX_REG_OP    = 10;
  localparam int unsigned CTX_REG_K     = 11;

  // Configuration bus: address bit 11 chooses context space (0) or control space (1).
  localparam int unsigned CFG_ADDR_W = 12;
  localparam int unsigned CFG_DATA_W = PIX_W;

  // Clamp a wide signed value to the pixel range.
  function automatic pix_t sat_pix(input logic signed [63:0] v);
    if (v > 64'(signed'(PIX_MAX)))      return PIX_MAX;
    else if (v < 64'(signed'(PIX_MIN))) return PIX_MIN;
    else                                return pix_t'(v);
  endfunction

endpackage
