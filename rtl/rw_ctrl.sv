// Read/write control circuit: drives the bit lines (BL) and source lines (SL) of all
// 64 x 4 = 256 columns.
//
// The row to program is latched with its 256 data bits when a write command is accepted
// (load); column 4*b+c carries bit c of bank b's weight. During a write each column gets
// the SET bias (BL high, SL low: the cell goes to LRS, weight 1) or the RESET bias (BL low,
// SL high: HRS, weight 0). For read and compute every column gets BL low / SL high, the
// bias under which the truth table of the cell lets an input of 1 through. Otherwise all
// lines are low. vwr is high only during a write: it stands for the drivers being at the
// +-1.2 V write level, while read and compute use a low-voltage bias that cannot switch a
// cell (the paper's low-voltage read). The polarities follow the cell description (positive bias sets, negative
// resets); the one-cycle write and the latched data are this design's choices. The real
// circuit applies +-1.2 V; here high/low are logic levels.
module rw_ctrl
  import ereCON_pkg::*;
#(
  parameter int unsigned NCOL = 256
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            load,
  input  logic [NCOL-1:0] wdata,
  input  bias_e           bias,
  output logic [NCOL-1:0] bl,
  output logic [NCOL-1:0] sl,
  output logic            vwr   // drivers at the write voltage (write only)
);

  logic [NCOL-1:0] data_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    data_q <= '0;
    else if (load) data_q <= wdata;
  end

  assign vwr = (bias == BIAS_WRITE);

  always_comb begin
    unique case (bias)
      BIAS_WRITE: begin bl = data_q;  sl = ~data_q; end
      BIAS_READ:  begin bl = '0;      sl = '1;      end
      default:    begin bl = '0;      sl = '0;      end
    endcase
  end

endmodule
