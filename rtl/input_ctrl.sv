// Enable and input control circuit.
//
// Captures the 64 input activations (up to 8 bits each) and the row mask when a compute
// command is accepted (load). During compute it drives IN[r] with bit bit_sel of
// activation r, so that the controller can step bit_sel from the most significant input
// bit down to bit 0, and drives En[r] (the rows' CIM_EN) from the row mask: a row whose
// weight was pruned away, or that the current layer does not use, stays disabled and
// draws no compute current. plane_zero reports a bit-plane with no active 1 input, which
// lets the accumulator skip the addition (event-driven operation with sparse or spiking
// inputs). For a read, IN and En are high on the addressed row only, so the adder tree
// returns that row's stored weight.
//
// The bit-serial MSB-first input order is the paper's; the row mask, the zero-plane flag
// and the read-through-compute scheme are this design's choices. load is sampled on the
// clock edge; the outputs are combinational from the registers and the mode inputs.
module input_ctrl
  import ereCON_pkg::*;
#(
  parameter int unsigned ROWS   = 64,
  parameter int unsigned ACT_W  = 8
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     load,
  input  logic [ROWS*ACT_W-1:0]    act,       // activation r at [ACT_W*r +: ACT_W]
  input  logic [ROWS-1:0]          row_mask,  // 1 = row takes part in compute
  input  in_mode_e                 mode,
  input  logic [$clog2(ACT_W)-1:0] bit_sel,
  input  logic [$clog2(ROWS)-1:0]  row,
  output logic [ROWS-1:0]          in,
  output logic [ROWS-1:0]          en,
  output logic                     plane_zero
);

  logic [ROWS*ACT_W-1:0] act_q;
  logic [ROWS-1:0]       mask_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_q  <= '0;
      mask_q <= '0;
    end else if (load) begin
      act_q  <= act;
      mask_q <= row_mask;
    end
  end

  always_comb begin
    in = '0;
    en = '0;
    unique case (mode)
      IN_CIM: begin
        for (int r = 0; r < ROWS; r++) in[r] = act_q[ACT_W*r + int'(bit_sel)];
        en = mask_q;
      end
      IN_READ: begin
        in[row] = 1'b1;
        en[row] = 1'b1;
      end
      default: ;
    endcase
  end

  assign plane_zero = ~|(in & en);

endmodule
