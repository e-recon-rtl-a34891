// Word-line decoder of the macro.
//
// Turns the row address and the mode into the 64 word lines shared by all banks: no line
// (idle), the addressed line only (write and read), or every line (compute, where all 64
// rows multiply in parallel). The paper names the block; turning on all word lines during
// compute is read from the bitcell waveforms, where WL is high whenever the cell computes.
// Combinational.
module wl_decoder
  import ereCON_pkg::*;
#(
  parameter int unsigned ROWS = 64
) (
  input  wl_mode_e                mode,
  input  logic [$clog2(ROWS)-1:0] addr,
  output logic [ROWS-1:0]         wl
);

  always_comb begin
    wl = '0;
    unique case (mode)
      WL_ONE:  wl[addr] = 1'b1;
      WL_ALL:  wl = '1;
      default: wl = '0;
    endcase
  end

endmodule
