// tb_sensor_io: sends random raw samples in each sensor width with random source gaps and
// random consumer stalls, and checks that every sample arrives once, in order, masked to
// the width and zero-extended.
module tb_sensor_io;
  import pe_pkg::*;

  logic clk = 0, rst_n = 0;
  sensor_fmt_e fmt = FMT_16;
  logic raw_valid = 0, raw_ready, out_valid, out_ready = 0;
  logic [SENSOR_W-1:0] raw_data = 0;
  pix_t out_data;
  int checks = 0, failures = 0, stalls = 0;
  int exp_q[$];

  sensor_io dut (.clk, .rst_n, .fmt, .raw_valid, .raw_data, .raw_ready, .out_valid, .out_data, .out_ready);

  always #5 clk = ~clk;

  // consumer: random ready, compares what it takes
  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (exp_q.size() == 0) begin
        failures++; $display("FAIL unexpected output");
      end else begin
        int e;
        e = exp_q.pop_front();
        if (int'(out_data) !== e) begin
          failures++; $display("FAIL got %0d expected %0d", int'(out_data), e);
        end
      end
    end
    if (rst_n && out_valid && !out_ready) stalls++;
    out_ready <= ($urandom_range(0, 2) != 0);
  end

  initial begin
    static int masks[4] = '{255, 4095, 16383, 65535};
    #22 rst_n = 1;
    for (int f = 0; f < 4; f++) begin
      // width changes only while the stream is empty
      @(negedge clk);
      fmt = sensor_fmt_e'(f);
      for (int n = 0; n < 200; n++) begin
        int d;
        d = int'($urandom_range(0, 65535));
        @(negedge clk);
        raw_valid = ($urandom_range(0, 3) != 0);
        raw_data  = 16'(d);
        if (raw_valid) begin
          // hold until taken
          while (!raw_ready) @(negedge clk);
          exp_q.push_back(d & masks[f]);
        end
        @(posedge clk);
        #1;
      end
      @(negedge clk);
      raw_valid = 0;
      while (exp_q.size() != 0) @(negedge clk);
    end
    repeat (5) @(posedge clk);
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no stall happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
