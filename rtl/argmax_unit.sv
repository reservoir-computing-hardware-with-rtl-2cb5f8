// argmax_unit: index of the largest of Q signed logits, the predicted class.
//
// The softmax of the read-out is monotonic, so the most likely class is simply the logit
// with the largest value; no exponentials are needed in hardware. On a tie the lowest index
// wins.
//
// Following the paper: the prediction is the argmax of the logits. Choices of this design:
// computing it in hardware at all (the paper's circuit figure ends at the logit registers),
// and the tie rule.
//
// Timing: purely combinational; a linear chain of Q-1 signed comparisons.
module argmax_unit #(
  parameter int unsigned Q       = reca_pkg::Q,
  parameter int unsigned LOGIT_W = reca_pkg::LOGIT_W,
  localparam int unsigned IW     = (Q > 1) ? $clog2(Q) : 1
) (
  input  logic signed [LOGIT_W-1:0] logits [Q],
  output logic [IW-1:0]             class_idx
);

  logic signed [LOGIT_W-1:0] best;

  always_comb begin
    class_idx   = '0;
    best = logits[0];
    for (int q = 1; q < int'(Q); q++) begin
      if (logits[q] > best) begin
        class_idx   = IW'(q);
        best = logits[q];
      end
    end
  end

endmodule
