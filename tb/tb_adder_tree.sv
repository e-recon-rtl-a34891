// Testbench of the interleaved adder tree: sums of 64 random 4-bit values, all zeros,
// all ones (64 x 15 = 960, the 10-bit maximum) and one-hot patterns.
module tb_adder_tree;
  localparam int N = 64, W = 4;
  logic [N*W-1:0] in;
  logic [9:0] sum;
  int checks = 0, failures = 0;

  adder_tree #(.N_IN(N), .IN_W(W)) dut (.in, .sum);

  task automatic check_sum();
    int exp = 0;
    for (int i = 0; i < N; i++) exp += int'(in[W*i +: W]);
    #1;
    checks++;
    if (int'(sum) != exp) begin
      failures++;
      if (failures < 10) $display("FAIL sum=%0d expected %0d", sum, exp);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    in = '0; check_sum();
    in = '1; check_sum();
    for (int i = 0; i < N; i++) begin
      in = '0; in[W*i +: W] = W'(i % 16); check_sum();
    end
    for (int t = 0; t < 2000; t++) begin
      for (int i = 0; i < N; i++) in[W*i +: W] = W'($urandom);
      check_sum();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
