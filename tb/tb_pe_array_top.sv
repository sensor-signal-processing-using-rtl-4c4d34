// tb_pe_array_top: end-to-end test of the PE array through its configuration bus.
//
// Scenarios, each checked result by result against the integer reference:
//   1. cascade: PE 0 Gaussian smoothing, PE 1 Laplacian, 16-bit sensor;
//   2. PE 1 bypassed, PE 0 switched to its Laplacian context;
//   3. PE 0 bypassed, PE 1 switched to a threshold context, sensor switched to 8 bits;
//   4. both PEs bypassed, 12-bit sensor: the masked samples come straight through;
//   5. cascade again without any gap or stall, checking one pixel per clock end to end.
// The sensor side inserts random gaps and the consumer random stalls (except in 5).
// The test counts how often each mechanism happened (cascade, bypass, context switch,
// sensor width switch, stall back to the sensor, output stall) and fails any that never did.
module tb_pe_array_top;
  import pe_pkg::*;
  import tb_ref_pkg::*;

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

  int checks = 0, failures = 0, cycles = 0, got = 0;
  int n_cascade = 0, n_bypass = 0, n_ctx_switch = 0, n_fmt_switch = 0;
  int n_in_stall = 0, n_out_stall = 0;
  int exp_q[$];
  bit gaps = 1;
  int first_out = -1, last_out = -1;

  pe_array_top dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      int e;
      checks++;
      got++;
      if (first_out < 0) first_out = cycles;
      last_out = cycles;
      e = (exp_q.size() != 0) ? exp_q.pop_front() : 999999;
      if (int'(out_data) !== e) begin
        failures++;
        if (failures < 10) $display("FAIL result %0d: got %0d expected %0d", got, int'(out_data), e);
      end
    end
    if (rst_n && out_valid && !out_ready) n_out_stall++;
    if (rst_n && sensor_valid && !sensor_ready) n_in_stall++;
    out_ready <= gaps ? ($urandom_range(0, 3) != 0) : 1'b1;
  end

  task automatic wr(input int addr, input int d);
    @(negedge clk);
    cfg_we = 1; cfg_addr = CFG_ADDR_W'(addr); cfg_wdata = CFG_DATA_W'(d);
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic load_ctx(input int pe, input int c, input int op, input int coef[9],
                          input int shift, input int k);
    for (int i = 0; i < 9; i++) wr((pe << 8) | (c << 4) | i, coef[i]);
    wr((pe << 8) | (c << 4) | 9, shift);
    wr((pe << 8) | (c << 4) | 10, op);
    wr((pe << 8) | (c << 4) | 11, k);
  endtask

  task automatic ctl(input int idx, input int d);
    wr(32'h800 | idx, d);
  endtask

  task automatic pe_setup(input int pe, input int w, input int h, input int c, input int byp);
    ctl(8'h10 + 4*pe + 0, w);
    ctl(8'h10 + 4*pe + 1, h);
    ctl(8'h10 + 4*pe + 2, c);
    ctl(8'h10 + 4*pe + 3, byp);
  endtask

  // Send a frame of w*h samples; expected results must already be queued.
  task automatic send(input int img[$], input bit do_start, input int n_out);
    got = 0;
    first_out = -1;
    if (do_start) begin
      @(negedge clk); start = 1;
      @(negedge clk); start = 0;
    end
    foreach (img[i]) begin
      while (gaps && $urandom_range(0, 4) == 0) begin
        sensor_valid = 0;
        @(negedge clk);
      end
      sensor_valid = 1;
      sensor_data  = 16'(img[i]);
      @(posedge clk);
      while (!sensor_ready) @(posedge clk);
      @(negedge clk);
    end
    sensor_valid = 0;
    for (int t = 0; t < 2000 && got < n_out; t++) @(negedge clk);
    repeat (4) @(negedge clk);
    checks++;
    if (got != n_out || exp_q.size() != 0 || pe_busy != 0) begin
      failures++;
      $display("FAIL frame: %0d results, expected %0d, busy %b", got, n_out, pe_busy);
    end
    exp_q = {};
  endtask

  function automatic void random_img(input int n, output int img[$]);
    img = {};
    for (int i = 0; i < n; i++) img.push_back(int'($urandom_range(0, 65535)));
  endfunction

  function automatic void mask_img(input int img[$], input int m, output int o[$]);
    o = {};
    foreach (img[i]) o.push_back(img[i] & m);
  endfunction

  initial begin
    static int gauss[9] = '{1, 2, 1, 2, 4, 2, 1, 2, 1};
    static int lap[9]   = '{0, 1, 0, 1, -4, 1, 0, 1, 0};
    static int zero[9]  = '{0, 0, 0, 0, 0, 0, 0, 0, 0};
    int img[$], m[$], t1[$], t2[$];
    int W = 12, H = 10;

    #22 rst_n = 1;
    // contexts: PE0 ctx0 Gaussian, ctx1 Laplacian; PE1 ctx1 Laplacian, ctx2 threshold
    load_ctx(0, 0, 0, gauss, 4, 0);
    load_ctx(0, 1, 0, lap, 0, 0);
    load_ctx(1, 1, 0, lap, 0, 0);
    load_ctx(1, 2, 5, zero, 0, 100);

    // 1. cascade Gaussian -> Laplacian, 16-bit sensor
    ctl(0, 3);
    pe_setup(0, W, H, 0, 0);
    pe_setup(1, W - 2, H - 2, 1, 0);
    random_img(W * H, img);
    pe_frame(img, W, H, 0, gauss, 4, 0, t1);
    pe_frame(t1, W - 2, H - 2, 0, lap, 0, 0, t2);
    foreach (t2[i]) exp_q.push_back(t2[i]);
    send(img, 1, (W - 4) * (H - 4));
    n_cascade++;

    // 2. PE1 bypassed, PE0 switched to Laplacian
    pe_setup(0, W, H, 1, 0);
    n_ctx_switch++;
    ctl(8'h10 + 4*1 + 3, 1);
    random_img(W * H, img);
    pe_frame(img, W, H, 0, lap, 0, 0, t1);
    foreach (t1[i]) exp_q.push_back(t1[i]);
    send(img, 1, (W - 2) * (H - 2));
    n_bypass++;

    // 3. PE0 bypassed, PE1 threshold, 8-bit sensor
    ctl(0, 0);
    n_fmt_switch++;
    pe_setup(0, W, H, 1, 1);
    pe_setup(1, W, H, 2, 0);
    n_ctx_switch++;
    random_img(W * H, img);
    mask_img(img, 255, m);
    pe_frame(m, W, H, 5, zero, 0, 100, t1);
    foreach (t1[i]) exp_q.push_back(t1[i]);
    send(img, 1, (W - 2) * (H - 2));
    n_bypass++;

    // 4. both bypassed, 12-bit sensor
    ctl(0, 1);
    n_fmt_switch++;
    ctl(8'h10 + 4*1 + 3, 1);
    random_img(W * H, img);
    mask_img(img, 4095, m);
    foreach (m[i]) exp_q.push_back(m[i]);
    send(img, 0, W * H);
    n_bypass++;

    // 5. cascade without gaps or stalls: one pixel per clock
    gaps = 0;
    ctl(0, 3);
    n_fmt_switch++;
    pe_setup(0, W, H, 0, 0);
    pe_setup(1, W - 2, H - 2, 1, 0);
    n_ctx_switch++;
    random_img(W * H, img);
    pe_frame(img, W, H, 0, gauss, 4, 0, t1);
    pe_frame(t1, W - 2, H - 2, 0, lap, 0, 0, t2);
    foreach (t2[i]) exp_q.push_back(t2[i]);
    send(img, 1, (W - 4) * (H - 4));
    n_cascade++;
    // results of the last output row arrive on consecutive clocks, and the whole
    // (W-4) x (H-4) result frame spans (H-5) input rows of W clocks plus W-4
    checks++;
    if (last_out - first_out + 1 != (H - 5) * W + (W - 4)) begin
      failures++;
      $display("FAIL rate: results spread over %0d clocks, expected %0d", last_out - first_out + 1, (H - 5) * W + (W - 4));
    end

    $display("mechanisms: cascade=%0d bypass=%0d ctx_switch=%0d fmt_switch=%0d in_stall=%0d out_stall=%0d",
             n_cascade, n_bypass, n_ctx_switch, n_fmt_switch, n_in_stall, n_out_stall);
    checks += 6;
    if (n_cascade == 0)    begin failures++; $display("FAIL no cascade"); end
    if (n_bypass == 0)     begin failures++; $display("FAIL no bypass"); end
    if (n_ctx_switch == 0) begin failures++; $display("FAIL no context switch"); end
    if (n_fmt_switch == 0) begin failures++; $display("FAIL no sensor width switch"); end
    if (n_in_stall == 0)   begin failures++; $display("FAIL no stall towards the sensor"); end
    if (n_out_stall == 0)  begin failures++; $display("FAIL no output stall"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
