// tb_context_regs: writes random words into every context over the write port, reads each
// context back and compares with a model; also checks reset values, ignored writes and
// the mapping of undefined opcodes.
module tb_context_regs;
  import pe_pkg::*;

  localparam int NC = 4;
  logic clk = 0, rst_n = 0, wr_en = 0;
  logic [1:0] wr_ctx = 0, rd_ctx = 0;
  logic [3:0] wr_reg = 0;
  logic [CFG_DATA_W-1:0] wr_data = 0;
  context_t ctx;
  int checks = 0, failures = 0;

  int m_coef[NC][9], m_shift[NC], m_op[NC], m_k[NC];

  context_regs #(.N_CTX(NC)) dut (.clk, .rst_n, .wr_en, .wr_ctx, .wr_reg, .wr_data, .rd_ctx, .ctx);

  always #5 clk = ~clk;

  task automatic wr(input int c, input int r, input int d);
    @(negedge clk);
    wr_en = 1; wr_ctx = 2'(c); wr_reg = 4'(r); wr_data = CFG_DATA_W'(d);
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic check_all();
    for (int c = 0; c < NC; c++) begin
      rd_ctx = 2'(c);
      #1;
      for (int i = 0; i < 9; i++) begin
        checks++;
        if (int'(ctx.coef[i]) !== m_coef[c][i]) begin
          failures++; $display("FAIL ctx%0d coef%0d %0d vs %0d", c, i, int'(ctx.coef[i]), m_coef[c][i]);
        end
      end
      checks += 3;
      if (int'(ctx.shift) !== m_shift[c]) begin failures++; $display("FAIL ctx%0d shift", c); end
      if (int'(ctx.op) !== m_op[c])       begin failures++; $display("FAIL ctx%0d op", c); end
      if (int'(ctx.k) !== m_k[c])         begin failures++; $display("FAIL ctx%0d k", c); end
    end
  endtask

  initial begin
    for (int c = 0; c < NC; c++) begin
      for (int i = 0; i < 9; i++) m_coef[c][i] = 0;
      m_shift[c] = 0; m_op[c] = 0; m_k[c] = 0;
    end
    #12 rst_n = 1;
    check_all();
    for (int n = 0; n < 300; n++) begin
      int c, r, d;
      c = int'($urandom_range(0, NC-1));
      r = int'($urandom_range(0, 15));
      d = int'($urandom_range(0, 262143));
      wr(c, r, d);
      if (r < 9)       m_coef[c][r] = (d % 256 >= 128) ? d % 256 - 256 : d % 256;
      else if (r == 9) m_shift[c] = d % 32;
      else if (r == 10) m_op[c] = (d % 8 <= 5) ? d % 8 : 0;
      else if (r == 11) m_k[c] = (d >= 131072) ? d - 262144 : d;
      if (n % 20 == 19) check_all();
    end
    check_all();
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
