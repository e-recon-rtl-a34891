// Testbench of the word-line decoder: every address in WL_ONE mode, WL_ALL and WL_NONE.
module tb_wl_decoder;
  import ereCON_pkg::*;
  wl_mode_e mode;
  logic [5:0] addr;
  logic [63:0] wl;
  int checks = 0, failures = 0;

  wl_decoder #(.ROWS(64)) dut (.mode, .addr, .wl);

  task automatic check(input logic [63:0] exp);
    #1;
    checks++;
    if (wl !== exp) begin
      failures++;
      $display("FAIL mode=%0d addr=%0d wl=%h expected %h", mode, addr, wl, exp);
    end
  endtask

  initial begin
    #10000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < 64; a++) begin
      addr = 6'(a);
      mode = WL_ONE;  check(64'd1 << a);
      mode = WL_ALL;  check('1);
      mode = WL_NONE; check('0);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
