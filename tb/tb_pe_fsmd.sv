// tb_pe_fsmd: runs frames of several sizes through the PE controller with random accept
// gaps, and checks the column it reports, the window-valid decision, the number of
// accepted pixels, the done pulse, the latched context, and that a disabled controller
// ignores start.
module tb_pe_fsmd;
  localparam int MAXW = 16, MAXH = 12;

  logic clk = 0, rst_n = 0, start = 0, enable = 1, accept = 0;
  logic [4:0] img_w = 0;
  logic [3:0] img_h = 0;
  logic [1:0] ctx_sel = 0, ctx_q;
  logic run, win_ok, busy, done;
  logic [3:0] col;
  int checks = 0, failures = 0;

  pe_fsmd #(.MAX_W(MAXW), .MAX_H(MAXH), .N_CTX(4)) dut (
    .clk, .rst_n, .start, .enable, .img_w, .img_h, .ctx_sel, .accept,
    .run, .col, .win_ok, .ctx_q, .busy, .done);

  always #5 clk = ~clk;

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s at %0t", what, $time); end
  endtask

  task automatic frame(input int w, input int h, input int c);
    int oks = 0;
    @(negedge clk);
    img_w = 5'(w); img_h = 4'(h); ctx_sel = 2'(c); start = 1;
    @(negedge clk);
    start = 0;
    ctx_sel = 2'(c + 1);   // later changes must not matter
    chk(run && busy, "running after start");
    chk(ctx_q === 2'(c), "context latched");
    for (int y = 0; y < h; y++) begin
      for (int x = 0; x < w; x++) begin
        while ($urandom_range(0, 2) == 0) begin
          accept = 0;
          @(negedge clk);
          chk(run && !done, "still running while idle");
        end
        accept = 1;
        #1;
        chk(int'(col) === x, "column");
        chk(win_ok === (x >= 2 && y >= 2), "window valid");
        if (win_ok) oks++;
        @(negedge clk);
      end
    end
    accept = 0;
    chk(!run && done, "done pulse after last pixel");
    @(negedge clk);
    chk(!done && !busy, "back to idle");
    chk(oks === (w - 2) * (h - 2), "results per frame");
  endtask

  initial begin
    #22 rst_n = 1;
    frame(5, 4, 1);
    frame(16, 12, 2);
    frame(3, 3, 3);
    frame(9, 2, 0);
    // disabled: start is ignored
    @(negedge clk);
    enable = 0; img_w = 5; img_h = 5; start = 1;
    @(negedge clk);
    start = 0;
    chk(!busy && !run, "disabled controller stays idle");
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
