// Testbench of the precision combiner: per-bank lanes with w8 = 0, and paired banks
// (low nibble bank 2k, high nibble bank 2k+1) with w8 = 1.
module tb_precision_combiner;
  logic w8;
  logic [64*20-1:0] total;
  logic signed [25:0] lane [64];
  int checks = 0, failures = 0;

  precision_combiner dut (.w8, .total, .lane);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int b = 0; b < 64; b++) total[20*b +: 20] = 20'($urandom);
      if (t == 0) total = '1;
      w8 = t[0];
      #1;
      for (int k = 0; k < 64; k++) begin
        longint exp;
        if (!w8) exp = longint'(total[20*k +: 20]);
        else if (k < 32) exp = longint'(total[20*2*k +: 20]) + 16 * longint'(total[20*(2*k+1) +: 20]);
        else exp = 0;
        checks++;
        if (longint'(lane[k]) != exp) begin
          failures++;
          if (failures < 10) $display("FAIL w8=%0b lane %0d = %0d expected %0d", w8, k, lane[k], exp);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
