// Weight-precision combiner: turns the 64 per-bank totals into peripheral lanes.
//
// A bank stores 4-bit weights. With w8 = 0 each bank is its own lane (weights of 1 to 4
// bits use the low bits of the nibble, the rest written as 0). With w8 = 1 the banks are
// paired: bank 2k holds the low nibble and bank 2k+1 the high nibble of an 8-bit weight,
// both fed the same inputs, and lane k = total[2k] + 16 * total[2k+1]; lanes 32..63 are 0.
// Combining banks for higher precision is the paper's; the pairing order and the unsigned
// weight format are this design's choices. Combinational.
module precision_combiner
  import ereCON_pkg::*;
#(
  parameter int unsigned NB  = N_BANKS,
  parameter int unsigned A_W = ACC_W,
  parameter int unsigned L_W = LANE_W
) (
  input  logic                   w8,
  input  logic [NB*A_W-1:0]      total,  // bank b at [A_W*b +: A_W]
  output logic signed [L_W-1:0]  lane [NB]
);

  always_comb begin
    for (int k = 0; k < NB; k++) begin
      if (!w8) begin
        lane[k] = L_W'(total[A_W*k +: A_W]);
      end else if (k < NB/2) begin
        lane[k] = L_W'(total[A_W*(2*k) +: A_W]) + (L_W'(total[A_W*(2*k+1) +: A_W]) << 4);
      end else begin
        lane[k] = '0;
      end
    end
  end

endmodule
