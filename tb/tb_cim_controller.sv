// Testbench of the controller: write, read and compute sequences, the MSB-first bit
// order, exactly N array cycles for N-bit inputs with first/last flags, the clamping of
// in_bits, and the N+3-cycle compute latency (the peripheral pipeline is modelled here as
// the two register stages it has in the macro).
module tb_cim_controller;
  import ereCON_pkg::*;
  logic clk = 0, rst_n;
  logic cmd_valid, cmd_ready;
  op_e cmd_op;
  logic [5:0] cmd_row;
  cim_cfg_t cmd_cfg;
  wl_mode_e wl_mode;
  logic [5:0] row;
  bias_e bias;
  in_mode_e in_mode;
  logic [2:0] bit_sel;
  logic act_load, wdata_load, capture, plane_valid, plane_first, plane_last;
  cim_cfg_t cfg;
  logic post_valid, busy, rd_valid, done;
  int checks = 0, failures = 0, cycles = 0;

  cim_controller dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  // model of the tree-register / accumulator / output-register delay
  logic d1, d2;
  always_ff @(posedge clk) begin
    d1 <= plane_valid && plane_last;
    d2 <= d1;
    post_valid <= d2;
  end

  initial begin
    wait (cycles == 20000);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s (cycle %0d)", what, cycles); end
  endtask

  // issue a command and return the number of cycles from acceptance to done
  task automatic issue(input op_e op, input logic [5:0] r, input logic [3:0] nb,
                       output int lat, output int planes, output logic order_ok,
                       output logic flags_ok);
    int n;
    int expect_bit;
    @(negedge clk);
    cmd_valid = 1; cmd_op = op; cmd_row = r; cmd_cfg = '0; cmd_cfg.in_bits = nb;
    cmd_cfg.acc_keep = 1;
    #1;
    chk(cmd_ready, "ready when idle");
    chk(act_load == (op == OP_COMPUTE) && wdata_load == (op == OP_WRITE), "load strobes");
    @(posedge clk); #1;
    cmd_valid = 0;
    lat = 0; planes = 0; order_ok = 1; flags_ok = 1;
    n = (nb == 0) ? 1 : (nb > 8) ? 8 : int'(nb);
    expect_bit = n - 1;
    while (1) begin
      lat++;
      if (plane_valid) begin
        planes++;
        if (int'(bit_sel) != expect_bit) order_ok = 0;
        if (plane_first != (expect_bit == n - 1)) flags_ok = 0;
        if (plane_last != (expect_bit == 0)) flags_ok = 0;
        if (wl_mode != WL_ALL || bias != BIAS_READ || in_mode != IN_CIM) flags_ok = 0;
        expect_bit--;
      end
      if (op == OP_WRITE && !(wl_mode == WL_ONE && bias == BIAS_WRITE && row == r))
        flags_ok = 0;
      if (op == OP_READ && lat == 1 && !(capture && wl_mode == WL_ONE && in_mode == IN_READ))
        flags_ok = 0;
      if (op == OP_READ && done && !rd_valid) flags_ok = 0;
      chk(!cmd_ready, "not ready while busy");
      if (done) break;
      @(posedge clk); #1;
    end
    @(posedge clk); #1;
    chk(cmd_ready && !busy, "idle after done");
  endtask

  initial begin
    int lat, planes;
    logic order_ok, flags_ok;
    rst_n = 0; cmd_valid = 0; cmd_op = OP_WRITE; cmd_row = 0; cmd_cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      issue(OP_WRITE, 6'(5 + rep), 4'd0, lat, planes, order_ok, flags_ok);
      chk(lat == 1, $sformatf("write latency %0d", lat));
      chk(flags_ok, "write controls");
      issue(OP_READ, 6'(9 + rep), 4'd0, lat, planes, order_ok, flags_ok);
      chk(lat == 2, $sformatf("read latency %0d", lat));
      chk(flags_ok, "read controls");
      for (int nb = 0; nb <= 10; nb++) begin
        int n;
        n = (nb == 0) ? 1 : (nb > 8) ? 8 : nb;
        issue(OP_COMPUTE, 6'd0, 4'(nb), lat, planes, order_ok, flags_ok);
        chk(planes == n, $sformatf("in_bits=%0d: %0d array cycles", nb, planes));
        chk(lat == n + 3, $sformatf("in_bits=%0d: latency %0d", nb, lat));
        chk(order_ok, "MSB-first order");
        chk(flags_ok, "first/last flags");
        chk(cfg.acc_keep == 1'b1 && int'(cfg.in_bits) == n, "config held");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
