// Testbench of the batch-norm unit: y = sat(((x * gamma) >>> shift) + beta) against a
// wide integer model, including negative scales and saturation at both ends; bypass.
module tb_batch_norm;
  logic en;
  logic signed [25:0] x, y;
  logic signed [7:0] gamma;
  logic signed [15:0] beta;
  logic [4:0] shift;
  int checks = 0, failures = 0;

  batch_norm dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 5000; t++) begin
      longint p, e;
      en = (t % 10) != 0;
      x = 26'($urandom);
      if (t % 7 == 0) x = 26'sh1FFFFFF;        // largest positive
      gamma = 8'($urandom); beta = 16'($urandom); shift = 5'($urandom_range(12, 0));
      #1;
      p = (longint'(x) * longint'(gamma)) >>> shift;
      e = p + longint'(beta);
      if (e > 33554431) e = 33554431;
      if (e < -33554432) e = -33554432;
      if (!en) e = longint'(x);
      checks++;
      if (longint'(y) != e) begin
        failures++;
        if (failures < 10) $display("FAIL x=%0d g=%0d b=%0d s=%0d y=%0d exp=%0d", x, gamma, beta, shift, y, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
