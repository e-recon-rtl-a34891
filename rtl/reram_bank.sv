// One E-ReCON bank: 64 rows x 4 columns of 3T1R ReRAM compute cells.
//
// Each row holds one 4-bit weight, column c holding weight bit c. Row r shares the word
// line WL[r], the enable En[r] and the input line IN[r] with the same row of every other
// bank; column c has its own BL/SL pair (global column 4*bank+c in the macro). In compute
// mode the row's four cells AND the input bit with the four weight bits and present the
// 4-bit partial product OUT r [3:0] to the bank's adder tree. Writing a row puts the
// SET/RESET bias on the four column pairs while only that row's word line is on.
//
// The 64 x 4 organisation, shared row lines and per-bank column lines follow the macro
// figure of the paper; the packed output layout (row r at pp[4r+3:4r]) is this design's.
// Purely combinational apart from the non-volatile cell state.
module reram_bank #(
  parameter int unsigned ROWS = 64,
  parameter int unsigned COLS = 4
) (
  input  logic [ROWS-1:0]      wl,
  input  logic [ROWS-1:0]      en,
  input  logic [ROWS-1:0]      in,
  input  logic [COLS-1:0]      bl,
  input  logic [COLS-1:0]      sl,
  input  logic                 vwr,  // column drivers at the write voltage
  output logic [ROWS*COLS-1:0] pp   // row r's partial product at [COLS*r +: COLS]
);

  for (genvar r = 0; r < ROWS; r++) begin : g_row
    for (genvar c = 0; c < COLS; c++) begin : g_col
      bitcell_3t1r u_cell (
        .bl    (bl[c]),
        .sl    (sl[c]),
        .vwr   (vwr),
        .wl    (wl[r]),
        .cim_en(en[r]),
        .in    (in[r]),
        .out   (pp[COLS*r + c])
      );
    end
  end

endmodule
