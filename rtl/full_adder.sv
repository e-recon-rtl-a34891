// One-bit full adder cell of the interleaved adder tree.
//
// The tree mixes two transistor-level cells: a compact 10T pass-transistor full adder
// and a conventional 28T static CMOS full adder. Both compute the exact full-adder
// function (the paper reports zero error for the interleaved tree), so the RTL is the
// same for both; the CELL parameter only records which cell sits at this position so
// that a netlist or a layout flow can map it. Combinational.
module full_adder
  import ereCON_pkg::*;
#(
  parameter fa_cell_e CELL = FA_28T
) (
  input  logic a,
  input  logic b,
  input  logic cin,
  output logic sum,
  output logic cout
);

  assign sum  = a ^ b ^ cin;
  assign cout = (a & b) | (cin & (a ^ b));

endmodule
