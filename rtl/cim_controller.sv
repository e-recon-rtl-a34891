// Controller of the macro: accepts one command at a time and sequences the array.
//
// Handshake: a command is taken on a clock edge where cmd_valid and cmd_ready are both
// high; cmd_ready is high only when the controller is idle. done pulses for one cycle when
// the operation has finished; rd_valid marks the cycle in which a read's data is valid.
//
//   WRITE   1 cycle : addressed word line on, SET/RESET bias on all columns, CIM_EN off.
//   READ    2 cycles: addressed row computed with input 1 (its weight reaches the adder
//                     trees), then the registered tree output is presented (rd_valid).
//   COMPUTE N cycles for N-bit inputs: all word lines on, read bias, bit N-1 .. bit 0 of
//                     the activations applied one per cycle (MSB first), each cycle
//                     flagged to the accumulators as plane_valid (plane_first on the MSB,
//                     plane_last on bit 0). Then the controller waits in DRAIN until the
//                     peripheral output register reports post_valid, and pulses done.
//
// Compute latency from the accepting edge: N array cycles, one cycle for the adder-tree
// register, one for the accumulator, one for the peripheral register: done is high in
// cycle N+3 after acceptance, and a new command can be accepted on the next edge.
// The bit-serial MSB-first schedule with N cycles for N bits is the paper's; the command
// set, the one-cycle write and the drain timing are this design's. An in_bits of 0 is
// treated as 1 and values above 8 as 8.
module cim_controller
  import ereCON_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  // command
  input  logic       cmd_valid,
  output logic       cmd_ready,
  input  op_e        cmd_op,
  input  logic [5:0] cmd_row,
  input  cim_cfg_t   cmd_cfg,
  // array control
  output wl_mode_e   wl_mode,
  output logic [5:0] row,
  output bias_e      bias,
  output in_mode_e   in_mode,
  output logic [2:0] bit_sel,
  output logic       act_load,   // capture activations and mask (compute accepted)
  output logic       wdata_load, // capture write data (write accepted)
  // accumulator / peripheral sequencing
  output logic       capture,    // register the tree output (read)
  output logic       plane_valid,
  output logic       plane_first,
  output logic       plane_last,
  output cim_cfg_t   cfg,
  input  logic       post_valid,
  // status
  output logic       busy,
  output logic       rd_valid,
  output logic       done
);

  typedef enum logic [2:0] {S_IDLE, S_WRITE, S_READ, S_READ_OUT, S_COMPUTE, S_DRAIN} state_e;

  state_e     state;
  logic [2:0] bit_q;
  logic [2:0] top_bit;
  logic [5:0] row_q;

  // top input bit for the command being accepted: in_bits clamped to 1..8, minus one
  always_comb begin
    if (cmd_cfg.in_bits == 4'd0)      top_bit = 3'd0;
    else if (cmd_cfg.in_bits > 4'd8)  top_bit = 3'd7;
    else                              top_bit = 3'(cmd_cfg.in_bits - 4'd1);
  end

  logic accept;
  assign cmd_ready  = (state == S_IDLE);
  assign accept     = cmd_valid && cmd_ready;
  assign act_load   = accept && (cmd_op == OP_COMPUTE);
  assign wdata_load = accept && (cmd_op == OP_WRITE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      bit_q <= '0;
      row_q <= '0;
      cfg   <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (accept) begin
          row_q <= cmd_row;
          unique case (cmd_op)
            OP_WRITE:   state <= S_WRITE;
            OP_READ:    state <= S_READ;
            OP_COMPUTE: begin
              state <= S_COMPUTE;
              bit_q <= top_bit;
              cfg   <= cmd_cfg;
              cfg.in_bits <= {1'b0, top_bit} + 4'd1;
            end
            default:    state <= S_IDLE;
          endcase
        end
        S_WRITE:    state <= S_IDLE;
        S_READ:     state <= S_READ_OUT;
        S_READ_OUT: state <= S_IDLE;
        S_COMPUTE: begin
          if (bit_q == 3'd0) state <= S_DRAIN;
          else               bit_q <= bit_q - 3'd1;
        end
        S_DRAIN:    if (post_valid) state <= S_IDLE;
        default:    state <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    wl_mode     = WL_NONE;
    bias        = BIAS_OFF;
    in_mode     = IN_IDLE;
    capture     = 1'b0;
    plane_valid = 1'b0;
    unique case (state)
      S_WRITE: begin
        wl_mode = WL_ONE;
        bias    = BIAS_WRITE;
      end
      S_READ: begin
        wl_mode = WL_ONE;
        bias    = BIAS_READ;
        in_mode = IN_READ;
        capture = 1'b1;
      end
      S_COMPUTE: begin
        wl_mode     = WL_ALL;
        bias        = BIAS_READ;
        in_mode     = IN_CIM;
        plane_valid = 1'b1;
      end
      default: ;
    endcase
  end

  assign row         = row_q;
  assign bit_sel     = bit_q;
  assign plane_first = (state == S_COMPUTE) && (bit_q == 3'(cfg.in_bits - 4'd1));
  assign plane_last  = (state == S_COMPUTE) && (bit_q == 3'd0);
  assign busy        = (state != S_IDLE);
  assign rd_valid    = (state == S_READ_OUT);
  assign done        = (state == S_WRITE) || (state == S_READ_OUT)
                    || ((state == S_DRAIN) && post_valid);

  // a command must hold still while it waits for cmd_ready
  property p_cmd_stable;
    @(posedge clk) disable iff (!rst_n)
      (cmd_valid && !cmd_ready) |=> (cmd_valid && ($stable(cmd_op)));
  endproperty
  a_cmd_stable: assert property (p_cmd_stable)
    else $error("command changed while waiting for cmd_ready");

endmodule
