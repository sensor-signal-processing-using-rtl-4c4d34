// tb_window_gen: streams random frames (with idle gaps) into the line-buffer window and
// compares the window that each pixel completes with the pixels taken from the frame.
module tb_window_gen;
  import pe_pkg::*;

  localparam int MAXW = 12;
  localparam int COLW = $clog2(MAXW);

  logic clk = 0, rst_n = 0, shift_en = 0;
  logic [COLW-1:0] col = '0;
  pix_t pix_in = '0;
  window_t win_next;
  int checks = 0, failures = 0, cycles = 0;

  window_gen #(.MAX_W(MAXW)) dut (.clk, .rst_n, .shift_en, .col, .pix_in, .win_next);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  task automatic frame(input int w, input int h);
    int img[$];
    img = {};
    for (int i = 0; i < w * h; i++) img.push_back(int'($urandom_range(0, 262143)) - 131072);
    for (int y = 0; y < h; y++) begin
      for (int x = 0; x < w; x++) begin
        // random idle cycles between pixels
        while ($urandom_range(0, 3) == 0) begin
          shift_en <= 0;
          @(posedge clk);
        end
        shift_en <= 1;
        col      <= COLW'(x);
        pix_in   <= pix_t'(img[y*w + x]);
        #1;
        @(negedge clk);
        if (x >= 2 && y >= 2) begin
          for (int r = 0; r < 3; r++)
            for (int c = 0; c < 3; c++) begin
              checks++;
              if (int'(win_next[r*3+c]) !== img[(y-2+r)*w + (x-2+c)]) begin
                failures++;
                $display("FAIL x=%0d y=%0d tap r%0d c%0d", x, y, r, c);
              end
            end
        end
        @(posedge clk);
      end
    end
    shift_en <= 0;
    @(posedge clk);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    frame(7, 5);
    frame(12, 6);
    frame(3, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
