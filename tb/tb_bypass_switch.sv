// tb_bypass_switch: drives random values on every input of the switch in both modes and
// checks where each valid, ready and data signal is routed.
module tb_bypass_switch;
  import pe_pkg::*;

  logic bypass, up_valid, up_ready, pe_in_valid, pe_in_ready;
  logic pe_out_valid, pe_out_ready, dn_valid, dn_ready;
  pix_t up_data, pe_in_data, pe_out_data, dn_data;
  int checks = 0, failures = 0;

  bypass_switch dut (.*);

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (bypass=%0b)", what, bypass); end
  endtask

  initial begin
    for (int n = 0; n < 400; n++) begin
      bypass       = 1'(n % 2);
      up_valid     = 1'($urandom);
      pe_in_ready  = 1'($urandom);
      pe_out_valid = 1'($urandom);
      dn_ready     = 1'($urandom);
      up_data      = pix_t'($urandom);
      pe_out_data  = pix_t'($urandom);
      #1;
      if (bypass) begin
        chk(dn_valid === up_valid && dn_data === up_data, "downstream takes upstream");
        chk(up_ready === dn_ready, "upstream ready from downstream");
        chk(pe_in_valid === 1'b0, "PE input idle");
        chk(pe_out_ready === 1'b0, "PE output held");
      end else begin
        chk(pe_in_valid === up_valid && pe_in_data === up_data, "PE takes upstream");
        chk(up_ready === pe_in_ready, "upstream ready from PE");
        chk(dn_valid === pe_out_valid && dn_data === pe_out_data, "downstream takes PE output");
        chk(pe_out_ready === dn_ready, "PE output ready from downstream");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
