// tb_ref_pkg: reference model for the testbenches of the sensor PE array.
//
// Plain integer arithmetic, written without the design's package: 3x3 convolution over a
// whole frame (valid windows only, so W x H becomes (W-2) x (H-2)), the five basic
// operations on the centre pixel, and clamping to the signed 18-bit pixel range.
package tb_ref_pkg;

  localparam int PMAX = 131071;
  localparam int PMIN = -131072;

  function automatic int sat18(input longint v);
    if (v > longint'(PMAX)) return PMAX;
    if (v < longint'(PMIN)) return PMIN;
    return int'(v);
  endfunction

  function automatic int alu_ref(input int op, input int a, input int k, input int shift);
    longint p;
    case (op)
      1: return sat18(longint'(a) + longint'(k));
      2: return sat18(longint'(a) - longint'(k));
      3: begin p = longint'(a) * longint'(k); return sat18(p >>> shift); end
      4: begin
           if (k == 0) return (a < 0) ? PMIN : PMAX;
           return sat18(longint'(a) / longint'(k));
         end
      5: return (a > k) ? 1 : 0;
      default: return a;
    endcase
  endfunction

  function automatic int conv_ref(input int win[9], input int coef[9], input int shift);
    longint acc = 0;
    for (int i = 0; i < 9; i++) acc += longint'(win[i]) * longint'(coef[i]);
    return sat18(acc >>> shift);
  endfunction

  // One PE on a frame: op 0 is the convolution, 1..5 the basic operations.
  function automatic void pe_frame(input int src[$], input int w, input int h,
                                   input int op, input int coef[9], input int shift,
                                   input int k, output int dst[$]);
    int win[9];
    dst = {};
    for (int y = 1; y < h - 1; y++) begin
      for (int x = 1; x < w - 1; x++) begin
        for (int r = 0; r < 3; r++)
          for (int c = 0; c < 3; c++)
            win[r*3+c] = src[(y - 1 + r) * w + (x - 1 + c)];
        if (op == 0) dst.push_back(conv_ref(win, coef, shift));
        else         dst.push_back(alu_ref(op, win[4], k, shift));
      end
    end
  endfunction

endpackage
