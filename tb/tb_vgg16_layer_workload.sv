// Workload testbench: the longest dot product of VGG-16 on 32x32 images (a 3x3x512 conv
// layer, 4,608 inputs per output) for one output pixel and 64 filters, on the macro at its
// default size, with 2-bit weights (held in the low bits of each 4-bit bank).
//
// The 4,608 inputs are cut into 72 segments of 64 rows. For each segment the array is
// reprogrammed (64 row writes) and one compute operation adds that segment into every
// bank's running total (acc_keep on all but the first, partial on all but the last), so
// the last operation returns the 64 full dot products. Batch norm and ReLU are off, so the
// lanes show the raw sums. Three runs:
//   1. random 2-bit activations and weights (the 2A2W setting);
//   2. all activations and weights at their maximum, the largest sum the layer can reach
//      (4,608 x 3 x 3 = 41,472), which must come out exact with no overflow flag;
//   3. random binary spikes as 1-bit inputs (spiking layer, one time step).
// Each lane is compared with an integer model, the overflow flags must stay clear, and the
// array must run exactly as many cycles per operation as the inputs have bits.
module tb_vgg16_layer_workload;
  import ereCON_pkg::*;

  localparam int K    = 3 * 3 * 512;   // inputs per dot product
  localparam int NSEG = K / 64;        // 72 segments

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

  initial begin
    wait (cycles == 1000000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // issue one command and wait for done; counts the cycles with an active bit-plane
  task automatic send(input cim_cmd_t c, output int active);
    @(negedge clk);
    cmd = c; cmd_valid = 1;
    while (!cmd_ready) @(negedge clk);
    @(posedge clk); #1;
    cmd_valid = 0;
    active = 0;
    while (!done) begin
      if (dut.plane_valid) active++;
      @(posedge clk); #1;
    end
  endtask

  // one full dot product over all segments; w[f * K + i] is filter f's weight for input i
  task automatic layer(ref int x[], ref int w[], input int bits, input string name);
    cim_cmd_t c;
    int a, t0;
    longint e;
    t0 = cycles;
    for (int s = 0; s < NSEG; s++) begin
      for (int r = 0; r < 64; r++) begin
        c = '0; c.op = OP_WRITE; c.row = 6'(r);
        for (int b = 0; b < 64; b++) c.wdata[4*b +: 4] = 4'(w[b * K + 64 * s + r]);
        send(c, a);
      end
      for (int r = 0; r < 64; r++) act[r] = 8'(x[64 * s + r]);
      c = '0; c.op = OP_COMPUTE;
      c.cfg.in_bits = 4'(bits); c.cfg.acc_keep = (s > 0); c.cfg.partial = (s < NSEG - 1);
      send(c, a);
      chk(a == bits, $sformatf("%s: array active %0d cycles for %0d-bit inputs", name, a, bits));
    end
    for (int f = 0; f < 64; f++) begin
      e = 0;
      for (int i = 0; i < K; i++) e += longint'(x[i]) * w[f * K + i];
      chk(longint'(result[f]) == e, $sformatf("%s: filter %0d: %0d expected %0d", name, f, result[f], e));
    end
    chk(ovf == '0, $sformatf("%s: overflow flags %h", name, ovf));
    $display("%s: %0d segments, lane 0 = %0d, max lane = %0d, %0d cycles",
             name, NSEG, result[0], class_val, cycles - t0);
  endtask

  initial begin
    int x[], w[];
    rst_n = 0; cmd_valid = 0; cmd = '0; row_mask = '1; bn_we = 0; bn_lane = 0;
    bn_gamma = 0; bn_beta = 0; bn_shift = 0; n_class = 7'd64;
    for (int r = 0; r < 64; r++) act[r] = 0;
    void'($urandom(32'd16));
    repeat (3) @(posedge clk);
    rst_n = 1;
    x = new[K];
    w = new[64 * K];

    foreach (x[i]) x[i] = $urandom_range(3, 0);
    foreach (w[i]) w[i] = $urandom_range(3, 0);
    layer(x, w, 2, "2A2W random");

    foreach (x[i]) x[i] = 3;
    foreach (w[i]) w[i] = 3;
    layer(x, w, 2, "2A2W maximum");
    chk(result[0] == 26'sd41472, "maximum sum is 4608 x 3 x 3");

    foreach (x[i]) x[i] = ($urandom_range(99, 0) < 20) ? 1 : 0;
    foreach (w[i]) w[i] = $urandom_range(3, 0);
    layer(x, w, 1, "spikes, 2-bit weights");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
