// Workload testbench: one complete LeNet-5 inference on the macro at its default size,
// with 2-bit activations and 4-bit weights (the 2A4W setting), using the layer shapes of
// the pruned LeNet-5 mapping: conv1 5x5x1 -> 6, 2x2 max pool, conv2 5x5x6 -> 16, 2x2 max
// pool, conv3 1x1x16 -> 120, flatten 1920, fc1 -> 84, fc2 -> 10, argmax. The same fc1
// outputs then also go through a 26-class last layer (the letters variant of the network).
//
// Weights are random 4-bit values and the input is a random 28x28 2-bit image, both from
// a fixed seed. Every layer runs in the macro: each output pixel is one compute operation
// whose activations are that pixel's input patch; dot products longer than 64 are cut
// into 64-row segments that are chained in the accumulators (acc_keep) while the array is
// reprogrammed between segments, with the intermediate passes marked partial so that the
// pooling registers only see final sums. Batch norm (gamma = 1, a per-layer negative
// offset) and ReLU run in the macro; max pooling runs in the macro over four successive
// operations. Between layers the testbench requantises the lane outputs to 2 bits
// (right shift and clamp), as a host would. An integer model computes every layer
// directly; each lane result and the final class are compared with it, and the array
// cycles per operation are checked against the 2 input bits.
module tb_lenet5_workload;
  import ereCON_pkg::*;

  localparam int ABITS = 2;
  localparam int AMAX  = (1 << ABITS) - 1;

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
  int n_ops = 0, n_writes = 0, n_partial = 0, n_pool_windows = 0;
  always #5 clk = ~clk;
  always @(posedge clk) cycles++;

  initial begin
    wait (cycles == 3000000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input logic ok, input string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // ------------------------------------------------------------------ macro access
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

  // program rows 0..nrows-1: bank b row r gets w[(ob + b) * K + ib + r] for ob + b < M
  task automatic load_weights(ref int w[], input int K, input int M, input int ob, input int ib,
                         input int nrows);
    cim_cmd_t c;
    int a;
    for (int r = 0; r < nrows; r++) begin
      c = '0; c.op = OP_WRITE; c.row = 6'(r);
      for (int b = 0; b < 64; b++)
        if (ob + b < M) c.wdata[4*b +: 4] = 4'(w[(ob + b) * K + ib + r]);
      send(c, a);
      n_writes++;
    end
  endtask

  // one compute operation on x[ib .. ib+len-1]
  task automatic op(ref int x[], input int ib, input int len, input logic keep,
                    input logic partial, input logic pool, input logic pstart);
    cim_cmd_t c;
    int a;
    for (int r = 0; r < 64; r++) act[r] = (r < len) ? 8'(x[ib + r]) : 8'(0);
    row_mask = (len >= 64) ? '1 : ((64'd1 << len) - 64'd1);
    c = '0; c.op = OP_COMPUTE;
    c.cfg.in_bits = 4'(ABITS); c.cfg.acc_keep = keep; c.cfg.partial = partial;
    c.cfg.bn_en = 1; c.cfg.relu_en = 1; c.cfg.pool_en = pool; c.cfg.pool_start = pstart;
    send(c, a);
    chk(a == ABITS, $sformatf("array active %0d cycles for %0d-bit inputs", a, ABITS));
    n_ops++;
    if (partial) n_partial++;
  endtask

  task automatic set_beta(input int beta);
    for (int k = 0; k < 64; k++) begin
      @(negedge clk);
      bn_we = 1; bn_lane = 6'(k); bn_gamma = 8'sd1; bn_beta = 16'(beta);
    end
    @(negedge clk); bn_we = 0;
  endtask

  // ------------------------------------------------------------------ model helpers
  function automatic int clog2i(input int v);
    int s = 0;
    while ((1 << s) <= v) s++;
    return s;
  endfunction

  // choose the batch-norm offset (minus the mean pre-activation) and the requantisation
  // shift (maximum after ReLU mapped to about AMAX) from the model's pre-activations
  task automatic pick(ref longint pre[], output int beta, output int sh);
    longint sum = 0, mx = 0;
    foreach (pre[i]) sum += pre[i];
    beta = -int'(sum / pre.size());
    if (beta < -32768) beta = -32768;
    foreach (pre[i]) if (pre[i] + beta > mx) mx = pre[i] + beta;
    sh = clog2i(int'(mx)) - ABITS;
    if (sh < 0) sh = 0;
  endtask

  function automatic int requant(input longint v, input int sh);
    longint q = v >>> sh;
    return (q > AMAX) ? AMAX : int'(q);
  endfunction

  // ------------------------------------------------------------------ network
  int img[], w1[], w2[], w3[], w4[], w5[], w6[];
  int f1[], f2[], f3[], f4[];   // requantised activations after each block
  int beta, sh;

  // convolution with optional 2x2 pooling; input C x H x H, kernel KS, M filters,
  // output (H-KS+1) (pooled by 2 when pool = 1). K = C*KS*KS.
  task automatic conv(ref int x[], ref int w[], input int C, input int H, input int KS,
                      input int M, input logic pool, ref int y[]);
    int OH = H - KS + 1;
    int PH = pool ? OH / 2 : OH;
    int K = C * KS * KS;
    int nseg = (K + 63) / 64;
    int ngrp = (M + 63) / 64;
    longint pre[];
    int patch[];
    longint model_out[];
    pre = new[M * OH * OH];
    patch = new[K];
    // model: pre-activations
    for (int o = 0; o < M; o++)
      for (int oy = 0; oy < OH; oy++)
        for (int ox = 0; ox < OH; ox++) begin
          longint s = 0;
          for (int c = 0; c < C; c++)
            for (int ky = 0; ky < KS; ky++)
              for (int kx = 0; kx < KS; kx++)
                s += longint'(x[(c * H + oy + ky) * H + ox + kx]) * w[o * K + (c * KS + ky) * KS + kx];
          pre[(o * OH + oy) * OH + ox] = s;
        end
    pick(pre, beta, sh);
    set_beta(beta);
    // model: BN, ReLU, pool
    model_out = new[M * PH * PH];
    for (int o = 0; o < M; o++)
      for (int py = 0; py < PH; py++)
        for (int px = 0; px < PH; px++) begin
          longint m = -(longint'(1) << 40);
          for (int d = 0; d < (pool ? 4 : 1); d++) begin
            int oy = pool ? 2 * py + d / 2 : py;
            int ox = pool ? 2 * px + d % 2 : px;
            longint v = pre[(o * OH + oy) * OH + ox] + beta;
            if (v < 0) v = 0;
            if (v > m) m = v;
          end
          model_out[(o * PH + py) * PH + px] = m;
        end
    // macro
    y = new[M * PH * PH];
    for (int g = 0; g < ngrp; g++) begin
      int nm = (M - 64 * g > 64) ? 64 : M - 64 * g;
      if (nseg == 1) load_weights(w, K, M, 64 * g, 0, K);
      for (int py = 0; py < PH; py++)
        for (int px = 0; px < PH; px++) begin
          for (int d = 0; d < (pool ? 4 : 1); d++) begin
            int oy = pool ? 2 * py + d / 2 : py;
            int ox = pool ? 2 * px + d % 2 : px;
            for (int c = 0; c < C; c++)
              for (int ky = 0; ky < KS; ky++)
                for (int kx = 0; kx < KS; kx++)
                  patch[(c * KS + ky) * KS + kx] = x[(c * H + oy + ky) * H + ox + kx];
            for (int s = 0; s < nseg; s++) begin
              int len = (K - 64 * s > 64) ? 64 : K - 64 * s;
              if (nseg > 1) load_weights(w, K, M, 64 * g, 64 * s, len);
              op(patch, 64 * s, len, s > 0, s < nseg - 1, pool, d == 0);
            end
          end
          if (pool) begin
            chk(pool_full, "pooling window complete");
            n_pool_windows++;
          end
          for (int k = 0; k < nm; k++) begin
            int o = 64 * g + k;
            longint e = model_out[(o * PH + py) * PH + px];
            chk(longint'(result[k]) == e,
                $sformatf("conv M=%0d o=%0d (%0d,%0d): %0d expected %0d", M, o, py, px, result[k], e));
            y[(o * PH + py) * PH + px] = requant(result[k], sh);
          end
        end
    end
  endtask

  // fully connected layer: K inputs, M outputs, returns lane values before requantisation
  task automatic fc(ref int x[], ref int w[], input int K, input int M, ref longint yv[]);
    int nseg = (K + 63) / 64;
    int ngrp = (M + 63) / 64;
    longint pre[];
    pre = new[M];
    for (int o = 0; o < M; o++) begin
      longint s = 0;
      for (int i = 0; i < K; i++) s += longint'(x[i]) * w[o * K + i];
      pre[o] = s;
    end
    pick(pre, beta, sh);
    set_beta(beta);
    yv = new[M];
    for (int g = 0; g < ngrp; g++) begin
      int nm = (M - 64 * g > 64) ? 64 : M - 64 * g;
      for (int s = 0; s < nseg; s++) begin
        int len = (K - 64 * s > 64) ? 64 : K - 64 * s;
        load_weights(w, K, M, 64 * g, 64 * s, len);
        op(x, 64 * s, len, s > 0, s < nseg - 1, 1'b0, 1'b0);
      end
      for (int k = 0; k < nm; k++) begin
        longint e = pre[64 * g + k] + beta;
        if (e < 0) e = 0;
        chk(longint'(result[k]) == e, $sformatf("fc M=%0d o=%0d: %0d expected %0d", M, 64 * g + k, result[k], e));
        yv[64 * g + k] = result[k];
      end
    end
  endtask

  task automatic rand_w(ref int w[], input int n);
    w = new[n];
    foreach (w[i]) w[i] = $urandom_range(15, 0);
  endtask

  initial begin
    longint v4[], v5[], v6[];
    int t0, best;
    rst_n = 0; cmd_valid = 0; cmd = '0; row_mask = '0; bn_we = 0; bn_lane = 0;
    bn_gamma = 0; bn_beta = 0; bn_shift = 0; n_class = 7'd10;
    for (int r = 0; r < 64; r++) act[r] = 0;
    void'($urandom(32'd5));
    repeat (3) @(posedge clk);
    rst_n = 1;

    img = new[28 * 28];
    foreach (img[i]) img[i] = $urandom_range(AMAX, 0);
    rand_w(w1, 6 * 25);
    rand_w(w2, 16 * 150);
    rand_w(w3, 120 * 16);
    rand_w(w4, 84 * 1920);
    rand_w(w5, 10 * 84);
    rand_w(w6, 26 * 84);

    t0 = cycles;
    conv(img, w1, 1, 28, 5, 6, 1'b1, f1);     // 24x24x6 -> pool 12x12x6
    $display("conv1+pool1: %0d operations so far, %0d cycles", n_ops, cycles - t0);
    conv(f1, w2, 6, 12, 5, 16, 1'b1, f2);     // 8x8x16 -> pool 4x4x16
    $display("conv2+pool2: %0d operations so far, %0d cycles", n_ops, cycles - t0);
    conv(f2, w3, 16, 4, 1, 120, 1'b0, f3);    // 4x4x120
    $display("conv3:       %0d operations so far, %0d cycles", n_ops, cycles - t0);
    // flatten channel-last: index (y*4 + x)*120 + c
    f4 = new[1920];
    for (int c = 0; c < 120; c++)
      for (int p = 0; p < 16; p++) f4[p * 120 + c] = f3[c * 16 + p];
    fc(f4, w4, 1920, 84, v4);
    $display("fc1:         %0d operations so far, %0d cycles", n_ops, cycles - t0);
    begin
      int f5[];
      f5 = new[84];
      foreach (f5[i]) f5[i] = requant(v4[i], sh);
      fc(f5, w5, 84, 10, v5);
      best = 0;
      for (int k = 1; k < 10; k++) if (v5[k] > v5[best]) best = k;
      chk(int'(class_idx) == best, $sformatf("class %0d expected %0d", class_idx, best));
      $display("fc2 + classification: class %0d; %0d operations (%0d partial passes), %0d row writes, %0d pooling windows, %0d cycles",
               class_idx, n_ops, n_partial, n_writes, n_pool_windows, cycles - t0);
      // the 26-class (letters) variant of the network differs only in its last layer
      n_class = 7'd26;
      fc(f5, w6, 84, 26, v6);
      best = 0;
      for (int k = 1; k < 26; k++) if (v6[k] > v6[best]) best = k;
      chk(int'(class_idx) == best, $sformatf("26-class head: class %0d expected %0d", class_idx, best));
      $display("fc2 with 26 classes: class %0d", class_idx);
    end
    chk(n_partial > 0 && n_pool_windows > 0, "chained passes and pooling exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
