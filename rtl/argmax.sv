// argmax: index of the largest of K signed values.
//
// It is the last stage of the classifiers: MLP-C applies it to the output
// neurons, SVM-C to the vote counts. A tree would be smaller in depth; this
// linear scan keeps the rule simple and is what the printed circuits (clock
// of hundreds of milliseconds) can afford. Ties go to the lowest index, as in
// the software model (numpy argmax) - this rule is a choice of this design.
// Purely combinational.
//
// Interface: val is K values of V_W bits, signed; idx is the winner's index.
module argmax #(
  parameter int K   = 3,
  parameter int V_W = 16,
  localparam int I_W = (K > 1) ? $clog2(K) : 1
) (
  input  logic signed [V_W-1:0] val [K],
  output logic [I_W-1:0]        idx
);

  logic signed [V_W-1:0] best;

  always_comb begin
    best = val[0];
    idx  = '0;
    for (int k = 1; k < K; k++) begin
      if (val[k] > best) begin
        best = val[k];
        idx  = I_W'(k);
      end
    end
  end

endmodule
