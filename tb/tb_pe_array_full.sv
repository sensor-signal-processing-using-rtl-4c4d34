// tb_pe_array_full: the two filter workloads on full-size frames at the default parameters.
//
// Frame 1: a 640 x 480 frame of 16-bit samples (a smooth ramp plus random noise) goes
// through PE 0 (Gaussian smoothing) and PE 1 (Laplacian) in cascade, without gaps or
// stalls. Every one of the 636 x 476 results is compared with the integer reference, and
// the frame must stream at one pixel per clock: the results span 475 input rows of 640
// clocks plus 636 clocks.
// Frame 2: the Laplacian alone. PE 0 switches to its Laplacian context and PE 1 is
// bypassed; the 638 x 478 results span 477 rows of 640 clocks plus 638 clocks.
module tb_pe_array_full;
  import pe_pkg::*;
  import tb_ref_pkg::*;

  localparam int W = 640, H = 480;

  logic clk = 0, rst_n = 0;
  logic sensor_valid = 0, sensor_ready;
  logic [SENSOR_W-1:0] sensor_data = 0;
  logic cfg_we = 0;
  logic [CFG_ADDR_W-1:0] cfg_addr = 0;
  logic [CFG_DATA_W-1:0] cfg_wdata = 0;
  logic start = 0;
  logic [1:0] pe_busy, pe_done;
  logic out_valid, out_ready = 1;
  pix_t out_data;

  int checks = 0, failures = 0, cycles = 0, got = 0, first_out = -1, last_out = -1;
  int expv[$];

  pe_array_top dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      checks++;
      if (first_out < 0) first_out = cycles;
      last_out = cycles;
      if (got >= expv.size() || int'(out_data) !== expv[got]) begin
        failures++;
        if (failures < 10) $display("FAIL result %0d: got %0d", got, int'(out_data));
      end
      got++;
    end
  end

  task automatic wr(input int addr, input int d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = CFG_ADDR_W'(addr); cfg_wdata = CFG_DATA_W'(d);
    @(negedge clk);
    cfg_we = 0;
  endtask

  // Send one frame and check its result count, rate and the end state. The frame
  // shrinks by `shrink` pixels in each dimension on its way through the array.
  task automatic run_frame(input int img[$], input int shrink);
    got = 0;
    first_out = -1;
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    foreach (img[i]) begin
      sensor_valid = 1;
      sensor_data  = 16'(img[i]);
      @(posedge clk);
      while (!sensor_ready) @(posedge clk);
      @(negedge clk);
    end
    sensor_valid = 0;
    repeat (10) @(negedge clk);
    checks += 3;
    if (got != (W - shrink) * (H - shrink)) begin
      failures++; $display("FAIL %0d results, expected %0d", got, (W - shrink) * (H - shrink));
    end
    if (last_out - first_out + 1 != (H - shrink - 1) * W + (W - shrink)) begin
      failures++; $display("FAIL rate: results over %0d clocks", last_out - first_out + 1);
    end
    if (pe_busy !== 0) begin failures++; $display("FAIL PEs still busy"); end
  endtask

  initial begin
    static int gauss[9] = '{1, 2, 1, 2, 4, 2, 1, 2, 1};
    static int lap[9]   = '{0, 1, 0, 1, -4, 1, 0, 1, 0};
    int img[$], t1[$];
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++)
        img.push_back((x * 50 + y * 30 + int'($urandom_range(0, 2047))) % 65536);
    pe_frame(img, W, H, 0, gauss, 4, 0, t1);
    pe_frame(t1, W - 2, H - 2, 0, lap, 0, 0, expv);

    #22 rst_n = 1;
    for (int i = 0; i < 9; i++) wr((0 << 8) | i, gauss[i]);
    wr(9, 4);
    wr(10, 0);
    for (int i = 0; i < 9; i++) wr((0 << 8) | (1 << 4) | i, lap[i]);
    for (int i = 0; i < 9; i++) wr((1 << 8) | i, lap[i]);
    wr(32'h800, 3);
    wr(32'h810, W);     wr(32'h811, H);     wr(32'h812, 0); wr(32'h813, 0);
    wr(32'h814, W - 2); wr(32'h815, H - 2); wr(32'h816, 0); wr(32'h817, 0);
    run_frame(img, 4);

    // Laplacian alone: PE 0 context 1, PE 1 bypassed
    pe_frame(img, W, H, 0, lap, 0, 0, expv);
    wr(32'h812, 1);
    wr(32'h817, 1);
    run_frame(img, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
