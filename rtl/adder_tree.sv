// Interleaved 10T/28T adder tree of one bank.
//
// Sums N_IN unsigned IN_W-bit partial products (default 64 x 4 bits, one per row) into
// an IN_W+log2(N_IN)-bit result (default 10 bits, enough for 64 x 15 = 960). The tree is
// a balanced binary tree of ripple-carry adders; each level widens the operands by one
// bit (4b -> 5b -> 6b -> 7b -> 8b -> 9b -> 10b, as printed in the paper's adder-tree
// figure). The leaf level's adders start with a 28T cell at the carry-in end, the next
// level's start with a 10T cell, and so on alternately, so that no 10T-cell degradation
// is passed on unrestored.
//
// Written as a generate loop over the levels: level l holds N_IN >> l values of IN_W + l
// bits in one packed vector (g_lvl[l].v) and is built from pairs of level l-1.
// Combinational; N_IN must be a power of two.
module adder_tree
  import ereCON_pkg::*;
#(
  parameter int unsigned N_IN  = 64,
  parameter int unsigned IN_W  = 4,
  parameter int unsigned OUT_W = IN_W + $clog2(N_IN)
) (
  input  logic [N_IN*IN_W-1:0] in,   // element i at [IN_W*i +: IN_W]
  output logic [OUT_W-1:0]     sum
);

  localparam int unsigned LEVELS = $clog2(N_IN);

  for (genvar l = 0; l <= LEVELS; l++) begin : g_lvl
    localparam int unsigned W = IN_W + l;      // value width at this level
    localparam int unsigned N = N_IN >> l;     // values at this level
    logic [N*W-1:0] v;

    if (l == 0) begin : g_leaves
      assign v = in;
    end else begin : g_adders
      // adders of this level start with a 28T cell on odd l (leaf adders are l = 1)
      localparam fa_cell_e FIRST = ((l % 2) == 1) ? FA_28T : FA_10T;
      for (genvar i = 0; i < N; i++) begin : g_add
        rca_interleaved #(.W(W-1), .FIRST_CELL(FIRST)) u_add (
          .a(g_lvl[l-1].v[(W-1)*(2*i)   +: (W-1)]),
          .b(g_lvl[l-1].v[(W-1)*(2*i+1) +: (W-1)]),
          .s(v[W*i +: W])
        );
      end
    end
  end

  assign sum = OUT_W'(g_lvl[LEVELS].v);

endmodule
