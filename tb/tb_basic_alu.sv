// tb_basic_alu: checks add, subtract, multiply, divide and compare against the integer
// reference, with random operands, divide by zero and saturating corner cases.
module tb_basic_alu;
  import pe_pkg::*;
  import tb_ref_pkg::*;

  opcode_e            op;
  pix_t               a, k, y;
  logic [SHIFT_W-1:0] shift;
  int checks = 0, failures = 0;

  basic_alu dut (.op, .a, .k, .shift, .y);

  task automatic run_case(input int o, input int av, input int kv, input int s);
    int exp;
    op = opcode_e'(o);
    a = pix_t'(av);
    k = pix_t'(kv);
    shift = SHIFT_W'(s);
    #1;
    exp = alu_ref(o, av, kv, s);
    checks++;
    if (int'(y) !== exp) begin
      failures++;
      $display("FAIL op=%0d a=%0d k=%0d s=%0d: got %0d expected %0d", o, av, kv, s, int'(y), exp);
    end
  endtask

  initial begin
    run_case(1, 131000, 1000, 0);       // add saturates high
    run_case(2, -131000, 1000, 0);      // subtract saturates low
    run_case(3, 1000, 300, 2);          // multiply with shift
    run_case(3, 100000, 100000, 0);     // multiply saturates
    run_case(4, 1000, 0, 0);            // divide by zero, positive
    run_case(4, -5, 0, 0);              // divide by zero, negative
    run_case(4, -131072, -1, 0);        // divide overflow
    run_case(4, -7, 2, 0);              // truncation toward zero
    run_case(5, 10, 10, 0);             // compare equal gives 0
    run_case(5, 11, 10, 0);
    for (int n = 0; n < 5000; n++) begin
      int av, kv;
      av = int'($urandom_range(0, 262143)) - 131072;
      kv = int'($urandom_range(0, 262143)) - 131072;
      if (n % 3 == 0) kv = int'($urandom_range(0, 64)) - 32;
      run_case(1 + (n % 5), av, kv, int'($urandom_range(0, 31)));
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
