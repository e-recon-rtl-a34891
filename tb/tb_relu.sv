// Testbench of the ReLU unit: negative values clipped to 0, others unchanged; bypass.
module tb_relu;
  logic en;
  logic signed [25:0] x, y;
  int checks = 0, failures = 0;

  relu dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      int e;
      en = (t % 5) != 0;
      x = 26'($urandom);
      if (t == 1) x = 26'sh2000000;   // most negative
      if (t == 2) x = '0;
      #1;
      e = (en && x < 0) ? 0 : int'(x);
      checks++;
      if (int'(y) != e) begin
        failures++;
        if (failures < 10) $display("FAIL en=%0b x=%0d y=%0d", en, x, y);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
