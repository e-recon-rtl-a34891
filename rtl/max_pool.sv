// Max-pooling unit and output register of one peripheral lane.
//
// The macro produces one output per lane per compute operation. For 2x2 max pooling the
// four outputs of a pooling window are computed as four successive operations; the first
// carries start = 1; a window also opens by itself after a full one, after reset and
// after pooling was off. On each valid input the register takes x (pooling off, or start) or
// max(register, x). count says how many outputs the current window has seen, and
// win_full is high once it reaches WINDOW (4 for the 2x2 pooling of the evaluated
// networks). out_valid is high for one cycle after each valid input. With hold set the
// valid input is ignored (register and count unchanged): the macro sets it on the
// intermediate passes of a chained dot product, whose sums are not final.
// The 2x2 max pooling is the paper's (its peripheral-power figure calls the pooling
// unit "AAD Pooling", which it does not explain); pooling across successive operations
// and the start flag are this design's choices.
module max_pool
  import ereCON_pkg::*;
#(
  parameter int unsigned L_W    = LANE_W,
  parameter int unsigned WINDOW = 4
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  valid,
  input  logic                  hold,   // ignore this valid (intermediate chained pass)
  input  logic                  en,
  input  logic                  start,
  input  logic signed [L_W-1:0] x,
  output logic signed [L_W-1:0] y,
  output logic [$clog2(WINDOW+1)-1:0] count,
  output logic                  win_full,
  output logic                  out_valid
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      y         <= '0;
      count     <= '0;
      out_valid <= 1'b0;
    end else begin
      out_valid <= valid;
      if (valid && !hold) begin
        if (!en) begin
          y     <= x;
          count <= '0;
        end else if (start || (count == '0) || (count == $bits(count)'(WINDOW))) begin
          y     <= x;
          count <= $bits(count)'(1);
        end else begin
          if (x > y) y <= x;
          count <= count + 1'b1;
        end
      end
    end
  end

  assign win_full = en && (count == $bits(count)'(WINDOW));

endmodule
