// E-ReCON: 16 Kb ReRAM digital compute-in-memory macro (top level).
//
// 64 banks of 64 rows x 4 columns of 3T1R AND-type ReRAM cells. All banks share the 64
// word lines, row enables and row inputs; each bank has its own 4 column (BL/SL) pairs and
// its own interleaved 10T/28T adder tree, 10-bit local register and accumulator. A compute
// operation applies 64 activations bit-serially, MSB first, one bit-plane per cycle. In
// each cycle every cell ANDs its row's input bit with its weight bit, each bank's adder
// tree sums its 64 4-bit partial products into 10 bits, and the accumulator shifts and
// adds. After N cycles (N = input bits, 1..8) bank b holds sum_r act[r] * w[b][r]: the
// macro computes 64 dot products of length 64 (or 32 with 8-bit weights, banks paired)
// per operation. The results pass through the peripheral lanes (batch norm, ReLU, 2x2
// max pooling) into the result registers; a classifier reports the argmax over the
// first n_class lanes. Binary (spike) inputs are the 1-bit case. Dot products longer than
// 64 are chained over passes (acc_keep); intermediate passes are marked partial and leave
// the lane registers untouched.
//
// Interface (one clock, active-low asynchronous reset):
//   cmd_valid/cmd_ready  command handshake; cmd holds op, row, write data and config
//   act, row_mask        64 activations and the row enables, sampled when a compute
//                        command is accepted
//   bn_*                 per-lane batch-norm parameter write port, bn_shift global
//   rd_valid, rd_data    a read's 64 4-bit weights (row cmd.row of every bank)
//   done                 one-cycle pulse at the end of every command
//   result, result_valid lane outputs after a compute; result_valid pulses with done
//   ovf                  per-bank accumulator saturation flags
// Timing: write 1 cycle, read 2 cycles, compute N+3 cycles from acceptance to done.
//
// From the paper: bank count and shape, shared row lines, per-bank column lines, the
// AND cell, the interleaved adder tree and its widths, bit-serial MSB-first inputs with
// N cycles for N bits, combining banks for higher weight precision, and the list of
// peripherals. This design's own: the command interface, the one-cycle write, reading
// through the compute path, the row mask, the accumulator and lane widths, the bank
// pairing order, and the fixed-point forms of batch norm, pooling and classification.
module ereCON_macro
  import ereCON_pkg::*;
(
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       cmd_valid,
  output logic                       cmd_ready,
  input  cim_cmd_t                   cmd,
  input  logic [MAX_IN_BITS-1:0]     act [N_ROWS],
  input  logic [N_ROWS-1:0]          row_mask,
  input  logic                       bn_we,
  input  logic [5:0]                 bn_lane,
  input  logic signed [GAMMA_W-1:0]  bn_gamma,
  input  logic signed [BETA_W-1:0]   bn_beta,
  input  logic [4:0]                 bn_shift,
  input  logic [6:0]                 n_class,
  output logic                       busy,
  output logic                       done,
  output logic                       rd_valid,
  output logic [N_COLS-1:0]          rd_data [N_BANKS],
  output logic signed [LANE_W-1:0]   result [N_BANKS],
  output logic                       result_valid,
  output logic [N_BANKS-1:0]         ovf,
  output logic                       pool_full,
  output logic [5:0]                 class_idx,
  output logic signed [LANE_W-1:0]   class_val
);

  localparam int unsigned NCOL = N_BANKS * N_COLS;

  // ---------------------------------------------------------------- controller
  wl_mode_e   wl_mode;
  bias_e      bias;
  in_mode_e   in_mode;
  logic [5:0] row;
  logic [2:0] bit_sel;
  logic       act_load, wdata_load, capture;
  logic       plane_valid, plane_first, plane_last, plane_zero;
  cim_cfg_t   cfg;
  logic       post_valid;

  cim_controller u_ctrl (
    .clk, .rst_n,
    .cmd_valid, .cmd_ready,
    .cmd_op (cmd.op),
    .cmd_row(cmd.row),
    .cmd_cfg(cmd.cfg),
    .wl_mode, .row, .bias, .in_mode, .bit_sel,
    .act_load, .wdata_load, .capture,
    .plane_valid, .plane_first, .plane_last,
    .cfg, .post_valid,
    .busy, .rd_valid, .done
  );

  // ---------------------------------------------------------------- row drivers
  logic [N_ROWS-1:0] wl, row_en, row_in;
  logic [N_ROWS*MAX_IN_BITS-1:0] act_flat;

  for (genvar r = 0; r < N_ROWS; r++) begin : g_act
    assign act_flat[MAX_IN_BITS*r +: MAX_IN_BITS] = act[r];
  end

  wl_decoder #(.ROWS(N_ROWS)) u_wl (
    .mode(wl_mode), .addr(row), .wl
  );

  input_ctrl #(.ROWS(N_ROWS), .ACT_W(MAX_IN_BITS)) u_in (
    .clk, .rst_n,
    .load(act_load), .act(act_flat), .row_mask,
    .mode(in_mode), .bit_sel, .row,
    .in(row_in), .en(row_en), .plane_zero
  );

  // ---------------------------------------------------------------- column drivers
  logic [NCOL-1:0] bl, sl;
  logic            vwr;

  rw_ctrl #(.NCOL(NCOL)) u_rw (
    .clk, .rst_n,
    .load(wdata_load), .wdata(cmd.wdata), .bias,
    .bl, .sl, .vwr
  );

  // ---------------------------------------------------------------- banks
  logic [N_BANKS*ACC_W-1:0] total;
  logic [N_BANKS-1:0]       acc_done;

  for (genvar b = 0; b < N_BANKS; b++) begin : g_bank
    logic [N_ROWS*N_COLS-1:0] pp;
    logic [TREE_W-1:0]        tree_sum, tree_q;

    reram_bank #(.ROWS(N_ROWS), .COLS(N_COLS)) u_bank (
      .wl, .en(row_en), .in(row_in),
      .bl(bl[N_COLS*b +: N_COLS]),
      .sl(sl[N_COLS*b +: N_COLS]),
      .vwr,
      .pp
    );

    adder_tree #(.N_IN(N_ROWS), .IN_W(N_COLS)) u_tree (
      .in(pp), .sum(tree_sum)
    );

    shift_accumulator u_acc (
      .clk, .rst_n,
      .tree_sum, .capture,
      .plane_valid, .plane_first, .plane_last, .plane_zero,
      .acc_keep(cfg.acc_keep),
      .tree_q,
      .total(total[ACC_W*b +: ACC_W]),
      .ovf(ovf[b]),
      .acc_done(acc_done[b])
    );

    assign rd_data[b] = tree_q[N_COLS-1:0];
  end

  // ---------------------------------------------------------------- peripherals
  logic signed [LANE_W-1:0]  lane [N_BANKS];
  logic signed [GAMMA_W-1:0] gamma_q [N_BANKS];
  logic signed [BETA_W-1:0]  beta_q [N_BANKS];
  logic [N_BANKS-1:0]        pool_valid, lane_full;
  logic [2:0]                pool_count [N_BANKS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < N_BANKS; k++) begin
        gamma_q[k] <= GAMMA_W'(1);
        beta_q[k]  <= '0;
      end
    end else if (bn_we) begin
      gamma_q[bn_lane] <= bn_gamma;
      beta_q[bn_lane]  <= bn_beta;
    end
  end

  precision_combiner u_comb (
    .w8(cfg.w8), .total, .lane
  );

  for (genvar k = 0; k < N_BANKS; k++) begin : g_lane
    logic signed [LANE_W-1:0] bn_y, act_y;

    batch_norm u_bn (
      .en(cfg.bn_en), .x(lane[k]), .gamma(gamma_q[k]), .beta(beta_q[k]),
      .shift(bn_shift), .y(bn_y)
    );

    relu u_relu (
      .en(cfg.relu_en), .x(bn_y), .y(act_y)
    );

    max_pool u_pool (
      .clk, .rst_n,
      .valid(acc_done[0]), .hold(cfg.partial),
      .en(cfg.pool_en), .start(cfg.pool_start),
      .x(act_y), .y(result[k]),
      .count(pool_count[k]),
      .win_full(lane_full[k]),
      .out_valid(pool_valid[k])
    );
  end

  assign post_valid   = pool_valid[0];
  assign result_valid = post_valid;
  assign pool_full    = lane_full[0];

  classifier u_cls (
    .lane(result), .n_class, .class_idx, .class_val
  );

endmodule
