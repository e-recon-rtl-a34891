// W-bit ripple-carry adder built from alternating 28T and 10T full adders.
//
// Adds two unsigned W-bit operands into a (W+1)-bit sum. Bit 0 (the carry-in end) uses
// the cell FIRST_CELL, bit 1 the other cell, and so on alternately, so that the voltage
// loss of a 10T cell is restored by the 28T cell that follows it. An adder stage that
// starts with 28T is followed in the tree by stages that start with 10T and so on (see
// adder_tree). The alternation follows the paper; which end counts as "first" (the
// carry-in end) is read from the CIN/COUT labels of the adder-structure figure.
// Combinational, carry-in tied to 0.
module rca_interleaved
  import ereCON_pkg::*;
#(
  parameter int unsigned W          = 4,
  parameter fa_cell_e    FIRST_CELL = FA_28T
) (
  input  logic [W-1:0] a,
  input  logic [W-1:0] b,
  output logic [W:0]   s
);

  logic [W:0] c;
  assign c[0] = 1'b0;

  for (genvar i = 0; i < W; i++) begin : g_bit
    localparam fa_cell_e CELL = ((i % 2) == 0) ? FIRST_CELL
                                : ((FIRST_CELL == FA_28T) ? FA_10T : FA_28T);
    full_adder #(.CELL(CELL)) u_fa (
      .a   (a[i]),
      .b   (b[i]),
      .cin (c[i]),
      .sum (s[i]),
      .cout(c[i+1])
    );
  end

  assign s[W] = c[W];

endmodule
