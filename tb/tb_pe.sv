// tb_pe: loads four contexts into one PE (Gaussian, Laplacian, a random kernel and a basic
// operation) and runs frames through it, with and without random input gaps and output
// stalls. Every result is compared with the integer reference. A frame sent without gaps
// or stalls must be taken at one pixel per clock, and its first result must come one clock
// after the pixel that completes the first window.
module tb_pe;
  import pe_pkg::*;
  import tb_ref_pkg::*;

  localparam int MAXW = 16, MAXH = 12;

  logic clk = 0, rst_n = 0, start = 0, enable = 1;
  logic [4:0] img_w = 0;
  logic [3:0] img_h = 0;
  logic [1:0] ctx_sel = 0, cfg_ctx = 0;
  logic busy, done, cfg_we = 0;
  logic [3:0] cfg_reg = 0;
  logic [CFG_DATA_W-1:0] cfg_wdata = 0;
  logic in_valid = 0, in_ready, out_valid, out_ready = 1;
  pix_t in_data = 0, out_data;
  int checks = 0, failures = 0, cycles = 0, stalls = 0;
  int exp_q[$];
  bit random_gaps = 0;
  int got = 0;

  pe #(.MAX_W(MAXW), .MAX_H(MAXH), .N_CTX(4)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  always @(posedge clk) begin
    if (rst_n && out_valid && out_ready) begin
      int e;
      checks++;
      got++;
      e = (exp_q.size() != 0) ? exp_q.pop_front() : 999999;
      if (int'(out_data) !== e) begin
        failures++; $display("FAIL result %0d expected %0d", int'(out_data), e);
      end
    end
    if (rst_n && out_valid && !out_ready) stalls++;
    out_ready <= random_gaps ? ($urandom_range(0, 3) != 0) : 1'b1;
  end

  task automatic wr(input int c, input int r, input int d);
    @(negedge clk);
    cfg_we = 1; cfg_ctx = 2'(c); cfg_reg = 4'(r); cfg_wdata = CFG_DATA_W'(d);
    @(negedge clk);
    cfg_we = 0;
  endtask

  task automatic load_ctx(input int c, input int op, input int coef[9], input int shift, input int k);
    for (int i = 0; i < 9; i++) wr(c, i, coef[i]);
    wr(c, 9, shift);
    wr(c, 10, op);
    wr(c, 11, k);
  endtask

  task automatic frame(input int w, input int h, input int c, input int op,
                       input int coef[9], input int shift, input int k, input bit gaps);
    int img[$], ref_out[$];
    int n_acc;
    img = {};
    for (int i = 0; i < w * h; i++) img.push_back(int'($urandom_range(0, 65535)));
    pe_frame(img, w, h, op, coef, shift, k, ref_out);
    foreach (ref_out[i]) exp_q.push_back(ref_out[i]);
    random_gaps = gaps;
    got = 0;
    @(negedge clk);
    img_w = 5'(w); img_h = 4'(h); ctx_sel = 2'(c); start = 1;
    @(negedge clk);
    start = 0;
    n_acc = 0;
    for (int i = 0; i < w * h; i++) begin
      while (gaps && $urandom_range(0, 3) == 0) begin
        in_valid = 0;
        @(negedge clk);
      end
      in_valid = 1;
      in_data  = pix_t'(img[i]);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      n_acc++;
      @(negedge clk);
    end
    in_valid = 0;
    while (busy) @(negedge clk);
    repeat (3) @(negedge clk);
    checks++;
    if (got != (w - 2) * (h - 2) || exp_q.size() != 0) begin
      failures++; $display("FAIL frame gave %0d results, expected %0d", got, (w - 2) * (h - 2));
    end
    if (!gaps) begin
      // one pixel per clock: the whole frame was taken in w*h clocks
      checks++;
      if (last_acc - first_acc + 1 != w * h) begin
        failures++; $display("FAIL rate: frame took %0d clocks for %0d pixels", last_acc - first_acc + 1, w * h);
      end
    end
    exp_q = {};
  endtask

  // latency: the first result appears one clock after the pixel (2,2) is accepted
  int acc_cnt = 0, first_res_cycle = -1, win_cycle = -1, first_acc = 0, last_acc = 0;
  always @(posedge clk) begin
    if (in_valid && in_ready) begin
      if (acc_cnt == 0) first_acc = cycles;
      last_acc = cycles;
      if (acc_cnt == 2 * int'(img_w) + 2) win_cycle = cycles;
      acc_cnt++;
    end
    if (out_valid && first_res_cycle < 0) first_res_cycle = cycles;
    if (start) begin acc_cnt = 0; first_res_cycle = -1; win_cycle = -1; end
  end

  initial begin
    static int gauss[9] = '{1, 2, 1, 2, 4, 2, 1, 2, 1};
    static int lap[9]   = '{0, 1, 0, 1, -4, 1, 0, 1, 0};
    static int rnd[9], zero[9] = '{0, 0, 0, 0, 0, 0, 0, 0, 0};
    for (int i = 0; i < 9; i++) rnd[i] = int'($urandom_range(0, 255)) - 128;
    #22 rst_n = 1;
    load_ctx(0, 0, gauss, 4, 0);
    load_ctx(1, 0, lap, 0, 0);
    load_ctx(2, 0, rnd, 3, 0);
    load_ctx(3, 5, zero, 0, 30000);     // threshold: 1 where pixel > 30000
    frame(8, 6, 0, 0, gauss, 4, 0, 0);
    checks++;
    if (first_res_cycle != win_cycle + 1) begin
      failures++; $display("FAIL latency: window at %0d, result at %0d", win_cycle, first_res_cycle);
    end
    frame(16, 12, 1, 0, lap, 0, 0, 1);
    frame(7, 9, 2, 0, rnd, 3, 0, 1);
    frame(10, 5, 3, 5, zero, 0, 30000, 0);
    // switch basic operation in context 3 between frames: multiply, divide, add, subtract
    for (int op = 1; op <= 4; op++) begin
      load_ctx(3, op, zero, 2, (op == 4) ? -3 : 777);
      frame(6, 5, 3, op, zero, 2, (op == 4) ? -3 : 777, 1);
    end
    checks++;
    if (stalls == 0) begin failures++; $display("FAIL no output stall happened"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
