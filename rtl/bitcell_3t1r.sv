// Behavioural model of the 3T1R ReRAM compute bitcell (not synthesizable logic in the
// real chip: one ReRAM device, the selector M1 and the two compute transistors M2/M3).
//
// Storage: the ReRAM device is either in the low-resistance state (LRS, weight 1) or the
// high-resistance state (HRS, weight 0). With the word line on and CIM_EN off, a positive
// write-level bias across the device (BL high, SL low) SETs it to LRS and a negative one
// (BL low, SL high) RESETs it to HRS. vwr says that the column drivers are at the write
// level (+-1.2 V); read and compute use a low-voltage bias that cannot switch the device,
// so with vwr low the same BL/SL polarity never writes. The state is non-volatile, so it is held in a level-sensitive
// latch that only changes while a write bias is applied; this latch is the device itself
// and is intended, not an inference accident.
//
// Compute: with WL and CIM_EN on, the cell drives OUT to the AND of the stored weight and
// the input. Following the truth table of the cell, an input of 1 is the condition
// BL low / SL high together with IN high; anything else gives OUT = 0. The cell never
// writes while CIM_EN is on (the paper keeps CIM_EN off during writes).
//
// Ports follow the cell schematic: bl, sl, wl, cim_en, in, out; vwr stands for the
// voltage level of the BL/SL drivers, which logic levels alone cannot express. There is no clock; a write
// takes effect while the bias is present and OUT follows its inputs combinationally.
// The 10 kOhm / 500 kOhm resistance window and the +-1.2 V SET/RESET levels are not
// modelled beyond the two logic states.
module bitcell_3t1r (
  input  logic bl,      // bit line (SET/RESET voltage, read bias)
  input  logic sl,      // source line
  input  logic vwr,     // BL/SL driven at the write voltage (1) or the read level (0)
  input  logic wl,      // word line, gate of selector M1
  input  logic cim_en,  // compute enable, gate of M2
  input  logic in,      // input activation bit, drain of M2
  output logic out      // AND-multiplication result
);

  logic lrs;  // 1: low-resistance state (weight 1), 0: high-resistance state (weight 0)

  always_latch begin
    if (wl && vwr && !cim_en && (bl != sl)) lrs = bl;  // SET when BL>SL, RESET when SL>BL
  end

  assign out = wl & cim_en & in & sl & ~bl & lrs;

endmodule
