// ReLU activation of one peripheral lane: y = max(x, 0) when en is high, y = x otherwise.
// The paper lists ReLU among the macro's peripheral activation functions; the bypass is
// this design's. Combinational.
module relu
  import ereCON_pkg::*;
#(
  parameter int unsigned L_W = LANE_W
) (
  input  logic                  en,
  input  logic signed [L_W-1:0] x,
  output logic signed [L_W-1:0] y
);

  assign y = (en && x[L_W-1]) ? '0 : x;

endmodule
