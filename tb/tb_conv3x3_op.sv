// tb_conv3x3_op: checks the 3x3 convolution operator against the integer reference on
// Gaussian and Laplacian kernels, random kernels and windows, and saturating inputs.
module tb_conv3x3_op;
  import pe_pkg::*;
  import tb_ref_pkg::*;

  window_t            win;
  coefs_t             coef;
  logic [SHIFT_W-1:0] shift;
  pix_t               y;
  int checks = 0, failures = 0;

  conv3x3_op dut (.win, .coef, .shift, .y);

  task automatic run_case(input int w[9], input int c[9], input int s);
    int exp;
    for (int i = 0; i < 9; i++) begin
      win[i]  = pix_t'(w[i]);
      coef[i] = coef_t'(c[i]);
    end
    shift = SHIFT_W'(s);
    #1;
    exp = conv_ref(w, c, s);
    checks++;
    if (int'(y) !== exp) begin
      failures++;
      $display("FAIL conv: got %0d expected %0d", int'(y), exp);
    end
  endtask

  initial begin
    int w[9], c[9];
    static int gauss[9] = '{1, 2, 1, 2, 4, 2, 1, 2, 1};
    static int lap[9]   = '{0, 1, 0, 1, -4, 1, 0, 1, 0};
    // Gaussian on a step edge, Laplacian on a point
    w = '{100, 100, 100, 100, 100, 100, 900, 900, 900};
    run_case(w, gauss, 4);
    w = '{0, 0, 0, 0, 1000, 0, 0, 0, 0};
    run_case(w, lap, 0);
    // saturation both ways
    w = '{65535, 65535, 65535, 65535, 65535, 65535, 65535, 65535, 65535};
    c = '{127, 127, 127, 127, 127, 127, 127, 127, 127};
    run_case(w, c, 0);
    c = '{-128, -128, -128, -128, -128, -128, -128, -128, -128};
    run_case(w, c, 0);
    // random
    for (int n = 0; n < 2000; n++) begin
      for (int i = 0; i < 9; i++) begin
        w[i] = int'($urandom_range(0, 262143)) - 131072;
        if (n % 2 == 0) w[i] = int'($urandom_range(0, 65535));
        c[i] = int'($urandom_range(0, 255)) - 128;
      end
      run_case(w, c, int'($urandom_range(0, 31)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
