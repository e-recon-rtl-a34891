// End-to-end testbench of the macro at its full default size (64 banks x 64 rows x
// 4 columns). It programs random weights into every row, reads rows back, then runs
// compute operations with 1..8-bit inputs against an integer model of the whole datapath:
// masked dot products, 4-bit and paired 8-bit weights, passes chained with acc_keep,
// accumulator saturation, partial passes that leave the lanes alone, batch norm, ReLU,
// 2x2 max pooling over four operations, and the
// argmax classifier. It checks the latency (write 1, read 2, compute N+3 cycles) and that
// the array is active for exactly N cycles, and counts how often each mechanism fired;
// a mechanism that never fired counts as a failure.
module tb_ereCON_macro;
  import ereCON_pkg::*;

  logic clk = 0, rst_n;
  logic cmd_valid, cmd_ready;
  cim_cmd_t cmd;
  logic [7:0] act [64];
  logic [63:0] row_mask;
  logic bn_we;
  logic [5:0] bn_lane;
  logic signed [7:0] bn_gamma;
  logic signed [15:0] bn_beta;
  logic [4:0] bn_shift;
  logic [6:0] n_class;
  logic busy, done, rd_valid, result_valid, pool_full;
  logic [3:0] rd_data [64];
  logic signed [25:0] result [64];
  logic [63:0] ovf;
  logic [5:0] class_idx;
  logic signed [25:0] class_val;

  ereCON_macro dut (.*);

  int checks = 0, failures = 0, cycles = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  // reference state
  int  W [64][64];          // W[bank][row]
  longint tot [64];         // accumulator totals
  logic   ovf_ref [64];
  longint pool_ref [64];
  int     pool_cnt;
  int     gam [64], bet [64];

  // mechanism counters
  int n_write, n_read, n_compute, n_prec [9], n_w8, n_keep, n_mask, n_zero_plane,
      n_sat, n_bn, n_relu_clip, n_pool_full, n_class_ev, n_partial;

  // count empty bit-planes seen by the array during compute
  always @(posedge clk)
    if (rst_n && dut.plane_valid && dut.plane_zero) n_zero_plane++;

  initial begin
    wait (cycles == 400000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s (cycle %0d)", what, cycles); end
  endtask

  // send one command, return cycles from acceptance to done
  task automatic send(input cim_cmd_t c, output int lat, output int active);
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    while (!cmd_ready) @(negedge clk);
    @(posedge clk); #1;
    cmd_valid = 0;
    lat = 1; active = 0;
    while (!done) begin
      if (dut.plane_valid) active++;
      @(posedge clk); #1;
      lat++;
    end
  endtask

  task automatic write_row(input int r);
    cim_cmd_t c;
    int lat, active;
    c = '0; c.op = OP_WRITE; c.row = 6'(r);
    for (int b = 0; b < 64; b++) c.wdata[4*b +: 4] = 4'(W[b][r]);
    send(c, lat, active);
    chk(lat == 1, $sformatf("write latency %0d", lat));
    n_write++;
  endtask

  task automatic read_row(input int r);
    cim_cmd_t c;
    int lat, active;
    c = '0; c.op = OP_READ; c.row = 6'(r);
    send(c, lat, active);
    chk(lat == 2 && rd_valid, $sformatf("read latency %0d", lat));
    for (int b = 0; b < 64; b++)
      chk(int'(rd_data[b]) == W[b][r], $sformatf("read bank %0d row %0d: %0d vs %0d", b, r, rd_data[b], W[b][r]));
    n_read++;
  endtask

  task automatic compute(input int n, input logic w8, input logic keep, input logic bn,
                         input logic relu_e, input logic pool, input logic pstart,
                         input int ncls, input logic part = 1'b0);
    cim_cmd_t c;
    int lat, active;
    longint lane_v, y;
    int bi;
    longint bv;
    c = '0; c.op = OP_COMPUTE;
    c.cfg.in_bits = 4'(n); c.cfg.w8 = w8; c.cfg.acc_keep = keep; c.cfg.bn_en = bn;
    c.cfg.relu_en = relu_e; c.cfg.pool_en = pool; c.cfg.pool_start = pstart;
    c.cfg.partial = part;
    n_class = 7'(ncls);
    // reference
    for (int b = 0; b < 64; b++) begin
      longint s = 0;
      for (int r = 0; r < 64; r++)
        if (row_mask[r]) s += longint'(act[r] & 8'((1 << n) - 1)) * W[b][r];
      s = keep ? tot[b] + s : s;
      if (s > 20'hFFFFF) begin s = 20'hFFFFF; ovf_ref[b] = 1; n_sat++; end
      else ovf_ref[b] = keep && ovf_ref[b];
      tot[b] = s;
    end
    send(c, lat, active);
    n_compute++; n_prec[n]++;
    if (w8) n_w8++;
    if (keep) n_keep++;
    if (part) n_partial++;
    if (row_mask != '1) n_mask++;
    chk(active == n, $sformatf("in_bits=%0d: array active %0d cycles", n, active));
    chk(lat == n + 3, $sformatf("in_bits=%0d: latency %0d", n, lat));
    chk(result_valid, "result_valid with done");
    if (!part) pool_cnt = (!pool) ? 0 : (pstart || pool_cnt == 0 || pool_cnt == 4) ? 1 : pool_cnt + 1;
    for (int k = 0; k < 64; k++) begin
      chk(ovf[k] == ovf_ref[k], $sformatf("ovf bank %0d", k));
      if (!w8) lane_v = tot[k];
      else if (k < 32) lane_v = tot[2*k] + 16 * tot[2*k+1];
      else lane_v = 0;
      y = lane_v;
      if (bn) begin
        y = ((lane_v * gam[k]) >>> bn_shift) + bet[k];
        if (y > 33554431) y = 33554431;
        if (y < -33554432) y = -33554432;
      end
      if (relu_e && y < 0) begin y = 0; n_relu_clip++; end
      if (part) ;  // lanes hold on an intermediate pass
      else if (!pool || pool_cnt == 1) pool_ref[k] = y;
      else if (y > pool_ref[k]) pool_ref[k] = y;
      chk(longint'(result[k]) == pool_ref[k],
          $sformatf("op %0d n=%0d result lane %0d = %0d expected %0d", n_compute, n, k, result[k], pool_ref[k]));
    end
    if (bn) n_bn++;
    if (pool_full) n_pool_full++;
    chk(pool_full == (pool && pool_cnt == 4), "pool_full");
    bi = 0; bv = pool_ref[0];
    for (int k = 1; k < ncls; k++) if (pool_ref[k] > bv) begin bv = pool_ref[k]; bi = k; end
    chk(int'(class_idx) == bi, $sformatf("class %0d expected %0d", class_idx, bi));
    n_class_ev++;
  endtask

  task automatic new_acts(input int density);
    for (int r = 0; r < 64; r++) begin
      act[r] = 8'($urandom);
      if ($urandom_range(99, 0) >= density) act[r] = 0;
    end
  endtask

  task automatic mech(input int cnt, input string name);
    $display("  %-28s %0d", name, cnt);
    chk(cnt > 0, {"mechanism never exercised: ", name});
  endtask

  initial begin
    rst_n = 0; cmd_valid = 0; cmd = '0; row_mask = '1; bn_we = 0; bn_lane = 0;
    bn_gamma = 0; bn_beta = 0; bn_shift = 0; n_class = 10;
    for (int r = 0; r < 64; r++) act[r] = 0;
    for (int b = 0; b < 64; b++) begin tot[b] = 0; ovf_ref[b] = 0; pool_ref[b] = 0; end
    pool_cnt = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;

    // batch-norm parameters
    bn_shift = 5'd3;
    for (int k = 0; k < 64; k++) begin
      gam[k] = $urandom_range(15, 0) - 5;
      bet[k] = $urandom_range(4000, 0) - 2000;
      @(negedge clk);
      bn_we = 1; bn_lane = 6'(k); bn_gamma = 8'(gam[k]); bn_beta = 16'(bet[k]);
    end
    @(negedge clk); bn_we = 0;

    // program the whole array
    for (int b = 0; b < 64; b++) for (int r = 0; r < 64; r++) W[b][r] = $urandom_range(15, 0);
    for (int r = 0; r < 64; r++) write_row(r);
    for (int r = 0; r < 64; r += 5) read_row(r);

    // every input precision, 4-bit weights, all rows
    for (int n = 1; n <= 8; n++) begin
      new_acts(100);
      compute(n, 0, 0, 0, 0, 0, 0, 10);
    end
    // spike-like sparse binary inputs (empty bit-planes happen)
    for (int t = 0; t < 4; t++) begin
      new_acts(t == 0 ? 0 : 3);
      compute(1, 0, 0, 0, 0, 0, 0, 10);
    end
    // pruned rows, 8-bit weights
    for (int t = 0; t < 4; t++) begin
      new_acts(60);
      row_mask = {$urandom, $urandom};
      compute(2 + 2 * t, 1, 0, 0, 0, 0, 0, 32);
    end
    row_mask = '1;
    // a 256-long dot product as four chained passes
    for (int p = 0; p < 4; p++) begin
      new_acts(100);
      compute(8, 0, p != 0, 0, 0, 0, 0, 64);
    end
    // pooled outputs of 128-long dot products: two chained passes per output, the first
    // marked partial so that the pooling register only sees final sums
    for (int i = 0; i < 4; i++) begin
      new_acts(70);
      compute(3, 0, 0, 1, 1, 1, i == 0, 10, 1'b1);
      new_acts(70);
      compute(3, 0, 1, 1, 1, 1, i == 0, 10, 1'b0);
    end
    // batch norm + ReLU + 2x2 max pooling over four operations, then classification
    for (int w = 0; w < 2; w++)
      for (int i = 0; i < 4; i++) begin
        new_acts(80);
        compute(4, 0, 0, 1, 1, 1, i == 0, 10);
      end
    // overflow: largest weights and inputs, chained until the accumulator saturates
    for (int b = 0; b < 64; b++) for (int r = 0; r < 64; r++) W[b][r] = 15;
    for (int r = 0; r < 64; r++) write_row(r);
    read_row(17);
    for (int r = 0; r < 64; r++) act[r] = 8'hFF;
    compute(8, 0, 0, 0, 0, 0, 0, 10);
    for (int p = 0; p < 4; p++) compute(8, 0, 1, 0, 0, 0, 0, 10);
    compute(3, 0, 0, 0, 0, 0, 0, 10);   // a fresh pass clears the saturation flag

    $display("mechanisms:");
    mech(n_write, "row writes");
    mech(n_read, "row reads");
    mech(n_compute, "compute operations");
    for (int n = 1; n <= 8; n++) mech(n_prec[n], $sformatf("%0d-bit inputs", n));
    mech(n_w8, "8-bit weights (bank pairs)");
    mech(n_keep, "chained passes");
    mech(n_partial, "partial passes held");
    mech(n_mask, "pruned rows masked");
    mech(n_zero_plane, "empty bit-planes skipped");
    mech(n_sat, "accumulator saturation");
    mech(n_bn, "batch norm");
    mech(n_relu_clip, "ReLU clipping");
    mech(n_pool_full, "full pooling windows");
    mech(n_class_ev, "classifications");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
