// Per-bank accumulator: the bank's local 10-bit register and the bit-serial shift-add.
//
// Stage 1 (local register): the 10-bit adder-tree result of the current bit-plane is
// registered (tree_q). It is also loaded for a read (capture), so that tree_q[3:0] is the
// read-back weight. A bit-plane with no active 1 input (plane_zero) leaves the register
// as it is, because its sum is zero by construction; this saves switching with sparse
// and spike inputs.
// Stage 2 (accumulator): the planes arrive MSB first, so the pass sum is
//     pass = (first ? 0 : pass << 1) + (zero ? 0 : tree_q)
// which after N planes equals sum_r act_r * w_r. On the last plane the pass is added to
// the running total (acc_keep = 1, used to chain passes when a dot product is longer than
// the 64 rows of a bank) or replaces it (acc_keep = 0). The total saturates at
// 2^ACC_W - 1 and raises ovf, which stays set until a pass with acc_keep = 0.
// acc_done is high for one cycle, two cycles after the last plane's cycle.
//
// The 10-bit local register after the adder tree and the MSB-first bit-serial order are
// the paper's; the paper calls the 10-bit registers "accumulation registers", but 10 bits
// only hold one plane (64 x 15 = 960), so the shift-add is done here in a wider pass
// register (TREE_W + 8 bits) and total (ACC_W bits), which are this design's choice.
module shift_accumulator
  import ereCON_pkg::*;
#(
  parameter int unsigned T_W   = TREE_W,
  parameter int unsigned P_W   = PASS_W,
  parameter int unsigned A_W   = ACC_W
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [T_W-1:0] tree_sum,
  input  logic           capture,
  input  logic           plane_valid,
  input  logic           plane_first,
  input  logic           plane_last,
  input  logic           plane_zero,
  input  logic           acc_keep,
  output logic [T_W-1:0] tree_q,
  output logic [A_W-1:0] total,
  output logic           ovf,
  output logic           acc_done
);

  logic           v1, first1, last1, zero1;
  logic [P_W-1:0] pass, pass_n;
  logic [A_W:0]   total_n;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tree_q <= '0;
      v1     <= 1'b0;
      first1 <= 1'b0;
      last1  <= 1'b0;
      zero1  <= 1'b0;
    end else begin
      if (capture || (plane_valid && !plane_zero)) tree_q <= tree_sum;
      v1     <= plane_valid;
      first1 <= plane_first;
      last1  <= plane_last;
      zero1  <= plane_zero;
    end
  end

  always_comb begin
    pass_n  = (first1 ? '0 : (pass << 1)) + (zero1 ? '0 : P_W'(tree_q));
    total_n = (acc_keep ? {1'b0, total} : '0) + (A_W+1)'(pass_n);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pass     <= '0;
      total    <= '0;
      ovf      <= 1'b0;
      acc_done <= 1'b0;
    end else begin
      acc_done <= v1 && last1;
      if (v1) begin
        pass <= pass_n;
        if (last1) begin
          if (total_n[A_W]) begin
            total <= '1;
            ovf   <= 1'b1;
          end else begin
            total <= total_n[A_W-1:0];
            ovf   <= acc_keep && ovf;
          end
        end
      end
    end
  end

endmodule
