// Classification unit: index and value of the largest of the first n_class lanes.
//
// Used on the last fully connected layer: the predicted class is the argmax of the
// logits. Softmax is monotonic, so the argmax of the softmax outputs is the same index;
// the softmax probabilities themselves are not produced. Ties go to the lower index.
// n_class values of 0 are treated as 1. The paper names softmax and classification as
// peripheral modules without describing them; this argmax is this design's choice.
// Combinational (a linear compare chain over the lanes).
module classifier
  import ereCON_pkg::*;
#(
  parameter int unsigned NL  = N_BANKS,
  parameter int unsigned L_W = LANE_W
) (
  input  logic signed [L_W-1:0]      lane [NL],
  input  logic [$clog2(NL):0]        n_class,
  output logic [$clog2(NL)-1:0]      class_idx,
  output logic signed [L_W-1:0]      class_val
);

  always_comb begin
    class_idx = '0;
    class_val = lane[0];
    for (int k = 1; k < NL; k++) begin
      if ((k < int'(n_class)) && (lane[k] > class_val)) begin
        class_idx = $bits(class_idx)'(k);
        class_val = lane[k];
      end
    end
  end

endmodule
