// Batch-normalisation unit of one peripheral lane.
//
// Applies the folded inference-time batch norm y = ((x * gamma) >>> shift) + beta, with
// gamma a signed GAMMA_W-bit scale, shift a common right shift and beta a signed offset,
// and saturates y to the signed lane width. With en = 0 the value passes unchanged. The
// paper only names batch normalisation among the peripherals; the fixed-point folded form
// and all widths are this design's. Combinational.
module batch_norm
  import ereCON_pkg::*;
#(
  parameter int unsigned L_W = LANE_W,
  parameter int unsigned G_W = GAMMA_W,
  parameter int unsigned B_W = BETA_W
) (
  input  logic                  en,
  input  logic signed [L_W-1:0] x,
  input  logic signed [G_W-1:0] gamma,
  input  logic signed [B_W-1:0] beta,
  input  logic [4:0]            shift,
  output logic signed [L_W-1:0] y
);

  localparam int unsigned P_W = L_W + G_W + 1;
  localparam logic signed [P_W-1:0] MAXV = (P_W'(1) <<< (L_W-1)) - P_W'(1);
  localparam logic signed [P_W-1:0] MINV = -MAXV - P_W'(1);

  logic signed [P_W-1:0] prod, norm;

  always_comb begin
    prod = P_W'(x) * P_W'(gamma);
    norm = (prod >>> shift) + P_W'(beta);
    if (!en)              y = x;
    else if (norm > MAXV) y = MAXV[L_W-1:0];
    else if (norm < MINV) y = MINV[L_W-1:0];
    else                  y = norm[L_W-1:0];
  end

endmodule
