// Testbench of the per-bank accumulator: random bit-plane sums fed MSB first for 1..8
// input bits, compared with sum_k plane_k * 2^k; chained passes with acc_keep; zero
// planes; saturation and the ovf flag; read capture; acc_done two cycles after the last
// plane.
module tb_shift_accumulator;
  logic clk = 0, rst_n;
  logic [9:0] tree_sum, tree_q;
  logic capture, plane_valid, plane_first, plane_last, plane_zero, acc_keep;
  logic [19:0] total;
  logic ovf, acc_done;
  int checks = 0, failures = 0, cycles = 0;

  shift_accumulator dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 50000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // one pass of n planes; returns the expected pass value
  task automatic run_pass(input int n, input logic keep, input int maxv, output longint pv);
    int done_at;
    pv = 0;
    for (int k = n - 1; k >= 0; k--) begin
      int v = $urandom_range(maxv, 0);
      if ($urandom_range(4, 0) == 0) v = 0;
      @(negedge clk);
      plane_valid = 1; plane_first = (k == n - 1); plane_last = (k == 0);
      plane_zero = (v == 0);
      tree_sum = plane_zero ? 10'($urandom) : 10'(v);  // a zero plane's sum is ignored
      acc_keep = keep;
      pv += longint'(v) << k;
    end
    @(negedge clk);
    plane_valid = 0; plane_first = 0; plane_last = 0; plane_zero = 0;
    done_at = 0;
    for (int c = 1; c <= 3; c++) begin
      @(posedge clk); #1;
      if (acc_done && done_at == 0) done_at = c;
    end
    // the last plane is applied in cycle k; acc_done is high in cycle k+2, the first
    // cycle sampled here after the one that clears plane_valid
    chk(done_at == 1, $sformatf("acc_done at sample %0d after the last plane", done_at));
  endtask

  initial begin
    longint pv, expv;
    rst_n = 0; tree_sum = 0; capture = 0; plane_valid = 0; plane_first = 0;
    plane_last = 0; plane_zero = 0; acc_keep = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    // single passes
    for (int t = 0; t < 200; t++) begin
      int n;
      n = 1 + (t % 8);
      run_pass(n, 1'b0, 960, pv);
      chk(longint'(total) == pv && !ovf, $sformatf("pass n=%0d total=%0d exp=%0d", n, total, pv));
    end
    // chained passes
    for (int t = 0; t < 30; t++) begin
      run_pass(8, 1'b0, 960, pv); expv = pv;
      for (int p = 0; p < 3; p++) begin run_pass(8, 1'b1, 960, pv); expv += pv; end
      chk(longint'(total) == expv && !ovf, $sformatf("chain total=%0d exp=%0d", total, expv));
    end
    // saturation
    run_pass(8, 1'b0, 960, pv); expv = pv;
    for (int p = 0; p < 40; p++) begin
      run_pass(8, 1'b1, 960, pv); expv += pv;
    end
    chk(expv >= (1 << 20) && total == 20'hFFFFF && ovf, "saturation and ovf");
    run_pass(2, 1'b0, 960, pv);
    chk(!ovf && longint'(total) == pv, "ovf cleared by a fresh pass");
    // read capture
    @(negedge clk); capture = 1; tree_sum = 10'h2A5;
    @(negedge clk); capture = 0;
    chk(tree_q == 10'h2A5, "capture");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
