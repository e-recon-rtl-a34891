// Testbench of the read/write control: write data latched on load, SET/RESET polarity
// per column under BIAS_WRITE, BL low / SL high under BIAS_READ, all low under BIAS_OFF.
module tb_rw_ctrl;
  import ereCON_pkg::*;
  logic clk = 0, rst_n, load;
  logic [255:0] wdata, ref_d, bl, sl;
  logic vwr;
  bias_e bias;
  int checks = 0, failures = 0, cycles = 0;

  rw_ctrl #(.NCOL(256)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 10000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    rst_n = 0; load = 0; bias = BIAS_OFF; wdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      @(negedge clk);
      for (int i = 0; i < 8; i++) wdata[32*i +: 32] = $urandom;
      ref_d = wdata; load = 1;
      @(negedge clk);
      load = 0; wdata = ~wdata;
      bias = BIAS_WRITE; #1;
      chk(bl === ref_d && sl === ~ref_d && vwr, "write bias");
      bias = BIAS_READ; #1;
      chk(bl === '0 && sl === '1 && !vwr, "read bias");
      bias = BIAS_OFF; #1;
      chk(bl === '0 && sl === '0 && !vwr, "off");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
