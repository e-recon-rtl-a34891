// Testbench of the classifier: argmax over the first n_class lanes, lowest index on ties.
module tb_classifier;
  logic signed [25:0] lane [64];
  logic [6:0] n_class;
  logic [5:0] class_idx;
  logic signed [25:0] class_val;
  int checks = 0, failures = 0;

  classifier dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int n, bi;
      longint bv;
      n = (t % 4 == 0) ? 10 : $urandom_range(64, 1);
      n_class = 7'(n);
      for (int k = 0; k < 64; k++) begin
        lane[k] = 26'($urandom_range(20, 0)) - 26'sd10;  // many ties
        if (t % 3 == 0) lane[k] = 26'($urandom);
      end
      #1;
      bi = 0; bv = longint'(lane[0]);
      for (int k = 1; k < n; k++) if (longint'(lane[k]) > bv) begin bv = longint'(lane[k]); bi = k; end
      checks++;
      if (int'(class_idx) != bi || longint'(class_val) != bv) begin
        failures++;
        if (failures < 10) $display("FAIL n=%0d idx=%0d exp %0d", n, class_idx, bi);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
