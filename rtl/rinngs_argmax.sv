// rinngs_argmax: index of the largest of N signed scores.
//
// Turns the four output-layer activations of RiNNgs into the predicted label
// (0, 1, 2, or 3-or-more rings). A linear scan keeps the first maximum, so a tie
// goes to the lower label (this design's choice). Combinational.
module rinngs_argmax
  import rinngs_pkg::*;
#(
  parameter int unsigned N = L3_OUT
) (
  input  act_t                   scores [N],
  output logic [$clog2(N)-1:0]   label
);

  always_comb begin
    act_t best;
    best  = scores[0];
    label = '0;
    for (int i = 1; i < N; i++) begin
      if (scores[i] > best) begin
        best  = scores[i];
        label = ($clog2(N))'(i);
      end
    end
  end

endmodule
