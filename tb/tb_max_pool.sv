// Testbench of the max-pool lane: windows of four successive values opened by start,
// the running maximum (signed), the window count and win_full, automatic restart after a
// full window, inputs ignored under hold, and pass-through with pooling off.
module tb_max_pool;
  logic clk = 0, rst_n, valid, hold, en, start, win_full, out_valid;
  logic signed [25:0] x, y;
  logic [2:0] count;
  int checks = 0, failures = 0, cycles = 0;

  max_pool #(.WINDOW(4)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 20000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    longint m;
    rst_n = 0; valid = 0; hold = 0; en = 0; start = 0; x = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int w = 0; w < 200; w++) begin
      for (int i = 0; i < 4; i++) begin
        @(negedge clk);
        valid = 1; en = 1; start = (i == 0) && (w % 3 != 0);  // every 3rd window restarts by count
        x = 26'($urandom) >>> 4;
        if ($urandom_range(1, 0) == 1) x = -x;
        m = (i == 0) ? longint'(x) : ((longint'(x) > m) ? longint'(x) : m);
        @(negedge clk);
        valid = 0;
        chk(out_valid, "out_valid");
        chk(longint'(y) == m, $sformatf("window %0d item %0d: y=%0d max=%0d", w, i, y, m));
        chk(int'(count) == i + 1, "count");
        chk(win_full == (i == 3), "win_full");
        // idle cycle: value held
        @(negedge clk);
        chk(!out_valid && longint'(y) == m, "idle");
        // a held (partial) input: acknowledged but not taken
        valid = 1; hold = 1; start = 1; x = 26'sh1FFFFFF;
        @(negedge clk);
        valid = 0; hold = 0;
        chk(out_valid && longint'(y) == m && int'(count) == i + 1, "hold");
      end
    end
    // pooling off: pass through
    for (int t = 0; t < 20; t++) begin
      @(negedge clk);
      valid = 1; en = 0; start = 0; x = 26'($urandom);
      @(negedge clk);
      valid = 0;
      chk(y == x && !win_full, "bypass");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
